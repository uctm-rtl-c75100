// delay_shaping_block -- the ten delay/shaping elements of the trigger path.
//
// Channel k takes bit k of the duplication block's output and produces the
// operand ik of the trigger equations (bit k of `out`). Each channel has its
// own delay and width (see delay_shaper). `dead` is the OR of all channel
// busy flags; it drives the dead-time LED, which lights whenever any channel
// is processing. `busy` gives the per-channel flags for status readout.
// Latency with delay 0: one clock from `in` to `out`.
module delay_shaping_block
  import uctm_pkg::*;
#(
  parameter int unsigned N = N_DUP
) (
  input  logic             clk,
  input  logic             rst_n,
  input  shape_cfg_t [N-1:0] cfg,
  input  logic [N-1:0]     in,
  output logic [N-1:0]     out,
  output logic [N-1:0]     busy,
  output logic             dead
);

  for (genvar k = 0; k < N; k++) begin : g_ch
    delay_shaper u_ch (
      .clk  (clk),
      .rst_n(rst_n),
      .cfg  (cfg[k]),
      .in   (in[k]),
      .out  (out[k]),
      .busy (busy[k])
    );
  end

  assign dead = |busy;

endmodule
