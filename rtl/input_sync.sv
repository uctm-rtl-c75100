// input_sync -- two-stage synchronization register for the discriminator inputs.
//
// The comparator outputs are asynchronous to the 100 MHz trigger clock. They
// pass through two registers in series, as drawn in the firmware diagram,
// before addressing the duplication memory; the second stage also feeds the
// input LED controller. Latency: the value captured by stage 1 on one clock
// edge appears on `q` after the next edge. No reset is needed for function;
// both stages are cleared by rst_n so that simulation starts from zero
// (this design's choice).
module input_sync #(
  parameter int unsigned W = uctm_pkg::N_IN
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,      // asynchronous comparator outputs
  output logic [W-1:0] q       // synchronized copy, two cycles later
);

  logic [W-1:0] meta_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta_q <= '0;
      q      <= '0;
    end else begin
      meta_q <= d;
      q      <= meta_q;
    end
  end

endmodule
