// scaler_bank -- a bank of 24-bit activity counters (scalers).
//
// Each counter is clocked by the very signal it counts, not by the system
// clock, so it can follow rates above 100 MHz: every rising edge of sig[i]
// while `en` is high adds one. `en` is the run enable from the run duration
// timer and `clr` (active high, asynchronous) clears every counter; it is
// used for reset, for the "counters reset" command and for the optional
// periodic reset. The counters wrap around at 2^24.
//
// Readout: the counts are sampled twice on the system clock (`cnt`), and on
// a `snap` pulse the sampled counts are also copied into `held`, which keeps
// the last one-second total when the counters are reset periodically.
// A count sampled while it is changing can be off by the bits still
// settling; read it after the run has stopped for an exact value.
//
// Counting on the signal itself, the 24-bit width, the enable gating and the
// clear all follow the paper; wrap-around, the two-register sampling and the
// snapshot register are this design's own choices. The counter clocks are
// data signals by intent (ripple-style scalers), and `en` enters each counter
// domain without synchronization because it changes only at run start/stop.
module scaler_bank #(
  parameter int unsigned N = uctm_pkg::N_IN,
  parameter int unsigned W = uctm_pkg::CNT_W
) (
  input  logic                clk,      // system clock, for readout
  input  logic                rst_n,    // system reset, clears `held`
  input  logic                clr,      // asynchronous clear, active high
  input  logic                en,       // counting enable (run)
  input  logic [N-1:0]        sig,      // signals to count, also the counter clocks
  input  logic                snap,     // copy the sampled counts into `held`
  output logic [N-1:0][W-1:0] cnt,      // counts, sampled on clk
  output logic [N-1:0][W-1:0] held      // counts captured at the last snap
);

  logic [W-1:0]        cnt_raw [N];   // one array element per counter clock domain
  logic [N-1:0][W-1:0] cnt_s1;

  for (genvar i = 0; i < N; i++) begin : g_cnt
    scaler #(.W(W)) u_scaler (.sig(sig[i]), .clr(clr), .en(en), .count(cnt_raw[i]));
  end

  always_ff @(posedge clk or posedge clr) begin
    if (clr) begin
      cnt_s1 <= '0;
      cnt    <= '0;
    end else begin
      for (int i = 0; i < N; i++) cnt_s1[i] <= cnt_raw[i];
      cnt <= cnt_s1;
    end
  end

  // `held` survives the periodic clear, so only the system reset clears it.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    held <= '0;
    else if (snap) held <= cnt;
  end

endmodule
