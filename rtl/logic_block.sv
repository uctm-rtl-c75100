// logic_block -- the logic block: a 2^10 x 8 dual-port truth-table memory.
//
// It works like the look-up table of an FPGA logic cell, only wider. The ten
// shaped signals i0..i9 (bit k = ik) form the address of port A; the 8-bit
// word read there holds the results of the eight trigger equations for that
// operand pattern: bit j = equation j (bits 0..3 are S0..S3, routed to the
// NIM outputs; bits 4..7 are C0..C3, counted only). Because every equation is
// a table lookup, any combinational function of up to ten operands costs the
// same single clock cycle. The table is computed by software by evaluating
// each equation for all 1024 operand patterns.
//
// Port A: read only, synchronous, data one clock after the address; the
// registered data drive the trigger outputs and the output scalers directly.
// Port B: synchronous read/write for configuration, read data one clock after
// the address. Single clock for both ports and power-up contents of zero
// are this design's choices.
module logic_block #(
  parameter int unsigned AW = uctm_pkg::N_DUP,  // 10 operands -> 1024 words
  parameter int unsigned DW = uctm_pkg::N_EQ    // 8 equations
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
