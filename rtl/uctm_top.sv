// uctm_top -- trigger, scaler and delay firmware of the configurable NIM module.
//
// Trigger path (all on the 100 MHz clock, one register per stage):
//   in_disc[7:0] -> input_sync (2 registers) -> dup_block (256 x 10 lookup,
//   fan-out/routing) -> delay_shaping_block (10 delay+width monostables)
//   -> logic_block (1024 x 8 truth table, 8 trigger equations)
//   -> equations 0..3 gated by `run` -> trig_out[3:0].
// With all delays at 0 a discriminator edge sampled by the first input
// register on clock edge n reaches trig_out after clock edge n+4, i.e. 40 ns
// of firmware latency, as the paper states; the sampling itself adds up to
// one more clock of jitter.
//
// Scalers: 8 input counters count the raw discriminator outputs, 8 output
// counters count the 8 equation results; each is clocked by its own signal
// and enabled by `run`. run_timer makes the run (free running or a timed
// duration in 1 ms steps) and the optional 1 s periodic counter reset.
// led_ctrl stretches activity on the 8 inputs, the 4 outputs and the dead
// time for the LEDs; the run LED and the run NIM output follow `run`.
//
// Everything is configured and read through the micro-controller bus
// (uctm_regs; address map in uctm_pkg). The comparators, the threshold DAC,
// the micro-controller itself and the LVTTL-to-NIM converters are outside
// the FPGA and appear here only as ports. Gating the trigger outputs with
// `run` follows the paper's statement that trigger generation, like
// counting, can last for a predefined time; the bus and map are this
// design's own.
module uctm_top
  import uctm_pkg::*;
#(
  parameter int unsigned CYC_PER_MS    = uctm_pkg::CYCLES_PER_MS,  // 1 ms at 100 MHz
  parameter int unsigned MS_PER_PERIOD = 1000,                  // periodic reset: 1 s
  parameter int unsigned LED_HOLD      = 5_000_000              // 50 ms LED stretch
) (
  input  logic                clk,          // 100 MHz trigger clock
  input  logic                rst_n,
  // from the eight fast comparators
  input  logic [N_IN-1:0]     in_disc,
  // to the LVTTL-to-NIM converters
  output logic [N_OUT-1:0]    trig_out,
  output logic                run_out,
  // LEDs
  output logic [N_IN-1:0]     led_in,
  output logic [N_OUT-1:0]    led_out,
  output logic                led_dead,
  output logic                led_run,
  // USB micro-controller bus
  input  logic [BUS_AW-1:0]   bus_addr,
  input  logic [BUS_DW-1:0]   bus_wdata,
  input  logic                bus_we,
  input  logic                bus_re,
  output logic [BUS_DW-1:0]   bus_rdata,
  output logic                bus_rvalid
);

  logic [N_IN-1:0]            sync_q;
  logic [N_DUP-1:0]           dup_q;
  logic [N_DUP-1:0]           shaped;
  logic [N_DUP-1:0]           busy;
  logic                       dead;
  logic [N_EQ-1:0]            eq_q;

  logic [N_IN-1:0]            dup_b_addr;
  logic [N_DUP-1:0]           dup_b_wdata, dup_b_q;
  logic                       dup_b_we;
  logic [N_DUP-1:0]           lut_b_addr;
  logic [N_EQ-1:0]            lut_b_wdata, lut_b_q;
  logic                       lut_b_we;

  shape_cfg_t [N_DUP-1:0]     shape_cfg;
  logic                       start, stop, clear, periodic_en;
  logic [DUR_W-1:0]           duration_ms, elapsed_ms;
  logic                       run, tick_1s;
  logic                       cnt_clr_q;

  logic [N_IN-1:0][CNT_W-1:0] cnt_in, held_in;
  logic [N_EQ-1:0][CNT_W-1:0] cnt_out, held_out;

  // ---- trigger path ------------------------------------------------------
  input_sync #(.W(N_IN)) u_sync (
    .clk(clk), .rst_n(rst_n), .d(in_disc), .q(sync_q)
  );

  dup_block u_dup (
    .clk(clk),
    .a_addr(sync_q), .a_q(dup_q),
    .b_addr(dup_b_addr), .b_wdata(dup_b_wdata), .b_we(dup_b_we), .b_q(dup_b_q)
  );

  delay_shaping_block #(.N(N_DUP)) u_shape (
    .clk(clk), .rst_n(rst_n), .cfg(shape_cfg), .in(dup_q),
    .out(shaped), .busy(busy), .dead(dead)
  );

  logic_block u_logic (
    .clk(clk),
    .a_addr(shaped), .a_q(eq_q),
    .b_addr(lut_b_addr), .b_wdata(lut_b_wdata), .b_we(lut_b_we), .b_q(lut_b_q)
  );

  assign trig_out = eq_q[N_OUT-1:0] & {N_OUT{run}};
  assign run_out  = run;
  assign led_run  = run;

  // ---- run control and scalers --------------------------------------------
  run_timer #(.CYC_PER_MS(CYC_PER_MS), .MS_PER_PERIOD(MS_PER_PERIOD)) u_timer (
    .clk(clk), .rst_n(rst_n), .start(start), .stop(stop),
    .duration_ms(duration_ms), .periodic_en(periodic_en),
    .run(run), .elapsed_ms(elapsed_ms), .tick_1s(tick_1s)
  );

  // Counter clear: a register, so the asynchronous clear is glitch free.
  // It follows tick_1s by one clock, after the scalers' snapshot.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_clr_q <= 1'b1;
    else        cnt_clr_q <= clear || tick_1s;
  end

  scaler_bank #(.N(N_IN)) u_cnt_in (
    .clk(clk), .rst_n(rst_n), .clr(cnt_clr_q), .en(run), .sig(in_disc), .snap(tick_1s),
    .cnt(cnt_in), .held(held_in)
  );

  scaler_bank #(.N(N_EQ)) u_cnt_out (
    .clk(clk), .rst_n(rst_n), .clr(cnt_clr_q), .en(run), .sig(eq_q), .snap(tick_1s),
    .cnt(cnt_out), .held(held_out)
  );

  // ---- LEDs ---------------------------------------------------------------
  led_ctrl #(.N(N_IN + N_OUT + 1), .HOLD(LED_HOLD)) u_led (
    .clk(clk), .rst_n(rst_n),
    .act({dead, trig_out, sync_q}),
    .led({led_dead, led_out, led_in})
  );

  // ---- micro-controller interface ------------------------------------------
  uctm_regs u_regs (
    .clk(clk), .rst_n(rst_n),
    .bus_addr(bus_addr), .bus_wdata(bus_wdata), .bus_we(bus_we), .bus_re(bus_re),
    .bus_rdata(bus_rdata), .bus_rvalid(bus_rvalid),
    .dup_addr(dup_b_addr), .dup_wdata(dup_b_wdata), .dup_we(dup_b_we), .dup_q(dup_b_q),
    .lut_addr(lut_b_addr), .lut_wdata(lut_b_wdata), .lut_we(lut_b_we), .lut_q(lut_b_q),
    .shape_cfg(shape_cfg),
    .start(start), .stop(stop), .clear(clear), .periodic_en(periodic_en),
    .duration_ms(duration_ms),
    .run(run), .dead(dead), .busy(busy), .elapsed_ms(elapsed_ms),
    .cnt_in(cnt_in), .held_in(held_in), .cnt_out(cnt_out), .held_out(held_out)
  );

endmodule
