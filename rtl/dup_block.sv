// dup_block -- the duplication block: a 2^8 x 10 dual-port lookup memory.
//
// The eight synchronized inputs, concatenated, form the address of port A;
// the 10-bit word read there is the set of signals handed to the ten
// delay/shaping channels (operands i0..i9). Whatever the fan-out, the memory
// is precomputed by software for every input pattern so that bit k of the
// word at address a equals a[src(k)], src(k) being the input chosen to be
// copied onto channel k. The memory thus behaves as a programmable fanout
// buffer and router with fixed one-cycle latency.
//
// Port A (trigger path): read only, synchronous, data valid one clock after
// the address. Port B (configuration): synchronous read/write from the
// micro-controller register interface, read data one clock after the
// address. Both ports share the trigger clock (the original uses a
// true dual-port block RAM; a single clock is this design's choice).
// The memory powers up cleared, so all channels are idle until configured.
module dup_block #(
  parameter int unsigned AW = uctm_pkg::N_IN,   // 8 input bits -> 256 words
  parameter int unsigned DW = uctm_pkg::N_DUP   // 10 output signals
) (
  input  logic          clk,
  // port A: trigger path
  input  logic [AW-1:0] a_addr,
  output logic [DW-1:0] a_q,
  // port B: configuration
  input  logic [AW-1:0] b_addr,
  input  logic [DW-1:0] b_wdata,
  input  logic          b_we,
  output logic [DW-1:0] b_q
);

  logic [DW-1:0] mem [2**AW];

  initial begin
    for (int i = 0; i < 2**AW; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    a_q <= mem[a_addr];
  end

  always_ff @(posedge clk) begin
    if (b_we) mem[b_addr] <= b_wdata;
    b_q <= mem[b_addr];
  end

endmodule
