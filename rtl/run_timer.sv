// run_timer -- run duration timer and run control.
//
// A run starts on `start` and ends on `stop`, or, when `duration_ms` is not
// zero, by itself after exactly duration_ms milliseconds (1 ms steps, up to
// 2^32-1 ms, about 50 days). `duration_ms` = 0 means "not used": the run is
// free running until stopped. `run` enables the scalers and the trigger
// outputs and drives the "run" NIM output and LED. `elapsed_ms` counts the
// whole milliseconds since the last start.
//
// A millisecond prescaler of CYC_PER_MS clocks (100 000 at 100 MHz) is
// restarted by `start`, so a timed run lasts exactly duration_ms*CYC_PER_MS
// clock cycles from the clock edge that samples `start`. The same prescaler
// also gives `tick_1s`, one clock wide every MS_PER_PERIOD ms while
// `periodic_en` is set: the periodic counter reset that turns counts into
// per-second rates.
//
// The 1 ms step, the 32-bit range, "0 = not used" and the one-second
// periodic reset follow the paper; building the periodic reset in hardware,
// restarting the prescaler at start and stop overriding a timed run are this
// design's choices.
module run_timer #(
  parameter int unsigned CYC_PER_MS    = uctm_pkg::CYCLES_PER_MS,
  parameter int unsigned MS_PER_PERIOD = 1000,
  parameter int unsigned DUR_W         = uctm_pkg::DUR_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             stop,
  input  logic [DUR_W-1:0] duration_ms,
  input  logic             periodic_en,
  output logic             run,
  output logic [DUR_W-1:0] elapsed_ms,
  output logic             tick_1s
);

  localparam int unsigned PW = $clog2(CYC_PER_MS);
  localparam int unsigned SW = $clog2(MS_PER_PERIOD);

  logic [PW-1:0] presc_q;
  logic [SW-1:0] sec_q;
  logic          ms_tick;
  logic          sec_end;

  assign ms_tick = (presc_q == PW'(CYC_PER_MS - 1));
  assign sec_end = (sec_q == SW'(MS_PER_PERIOD - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      presc_q    <= '0;
      sec_q      <= '0;
      run        <= 1'b0;
      elapsed_ms <= '0;
      tick_1s    <= 1'b0;
    end else begin
      tick_1s <= 1'b0;
      if (start) begin
        presc_q    <= '0;
        sec_q      <= '0;
        run        <= 1'b1;
        elapsed_ms <= '0;
      end else begin
        presc_q <= ms_tick ? '0 : presc_q + 1'b1;
        if (ms_tick) begin
          sec_q   <= sec_end ? '0 : sec_q + 1'b1;
          tick_1s <= sec_end && periodic_en;
          if (run) begin
            elapsed_ms <= elapsed_ms + 1'b1;
            if (duration_ms != '0 && elapsed_ms + 1'b1 == duration_ms) run <= 1'b0;
          end
        end
        if (stop) run <= 1'b0;
      end
    end
  end

endmodule
