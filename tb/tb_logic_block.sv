// tb_logic_block -- truth-table memory test.
// 0) The two-input OR example itself: a four-word, one-bit instance holding
//    {0,1,1,1}, read at all four addresses.
// 1) The same OR in the full-size table: every
//    equation bit j of the 1024-word table is loaded with the OR of operands
//    i0 and i1 and checked over all four patterns of (i1,i0).
// 2) A table computed from eight equations of up to ten operands (those of
//    the example GUI screen: i0; i0&i1; !(i2^i3); sup(i0+i2+i7;2);
//    (i0&i1)|i4; i0 nand i6; i0 nor i6; i0 xnor i5) is loaded through port B
//    and checked through port A for every operand pattern, then read back
//    through port B.
`timescale 1ns/1ps
module tb_logic_block;
  localparam int AW = 10, DW = 8;
  logic clk = 0;
  logic [AW-1:0] a_addr, b_addr;
  logic [DW-1:0] a_q, b_q, b_wdata;
  logic b_we;
  int checks = 0, failures = 0;

  logic_block #(.AW(AW), .DW(DW)) dut (.*);

  // The four-word, one-bit OR memory itself: addresses 0..3 hold 0,1,1,1.
  logic [1:0] or_addr, or_baddr;
  logic [0:0] or_q, or_bq, or_wdata;
  logic or_we;
  logic_block #(.AW(2), .DW(1)) u_or (
    .clk(clk), .a_addr(or_addr), .a_q(or_q),
    .b_addr(or_baddr), .b_wdata(or_wdata), .b_we(or_we), .b_q(or_bq)
  );

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [DW-1:0] got, logic [DW-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  // Reference equations, evaluated directly on the operand vector.
  function automatic logic [DW-1:0] eqs(logic [AW-1:0] i);
    logic [DW-1:0] s;
    s[0] = i[0];
    s[1] = i[0] & i[1];
    s[2] = !(i[2] ^ i[3]);
    s[3] = (int'(i[0]) + int'(i[2]) + int'(i[7])) >= 2;
    s[4] = (i[0] & i[1]) | i[4];
    s[5] = !(i[0] & i[6]);
    s[6] = !(i[0] | i[6]);
    s[7] = !(i[0] ^ i[5]);
    return s;
  endfunction

  initial begin
    b_we = 0; b_addr = '0; b_wdata = '0; a_addr = '0;
    or_we = 0; or_addr = '0; or_baddr = '0; or_wdata = '0;
    repeat (2) @(posedge clk);
    for (int a = 0; a < 4; a++) begin
      @(negedge clk) or_baddr = 2'(a); or_wdata = (a != 0); or_we = 1;
    end
    @(negedge clk) or_we = 0;
    for (int a = 0; a < 4; a++) begin
      @(negedge clk) or_addr = 2'(a);
      @(negedge clk);
      checks++;
      if (or_q !== 1'(a[0] | a[1])) begin
        failures++; $display("four-word OR: address %0d gave %b", a, or_q);
      end
    end
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk);
      b_addr = AW'(a); b_we = 1;
      b_wdata = {DW{a[0] | a[1]}};
    end
    @(negedge clk) b_we = 0;
    for (int a = 0; a < 4; a++) begin
      @(negedge clk) a_addr = AW'(a);
      @(negedge clk);
      check("OR table", a_q, (a == 0) ? '0 : '1);
    end
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk);
      b_addr = AW'(a); b_we = 1; b_wdata = eqs(AW'(a));
    end
    @(negedge clk) b_we = 0;
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk) a_addr = AW'(a); b_addr = AW'(a ^ 10'h3ff);
      @(negedge clk);
      check("equations A", a_q, eqs(AW'(a)));
      check("read back B", b_q, eqs(AW'(a ^ 10'h3ff)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
