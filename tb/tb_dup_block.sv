// tb_dup_block -- duplication memory test.
// 1) Loads a random 256 x 10 table through port B, reads it back through
//    port B and through port A, checking the one-clock read latency.
// 2) Loads a routing matrix (channel k copies input src[k], with the
//    channel-to-input choice of the muon-lifetime setup: i0 and i1 both copy
//    input 0) and checks the fan-out for every input pattern.
`timescale 1ns/1ps
module tb_dup_block;
  localparam int AW = 8, DW = 10;
  logic clk = 0;
  logic [AW-1:0] a_addr, b_addr;
  logic [DW-1:0] a_q, b_q, b_wdata;
  logic b_we;
  logic [DW-1:0] model [2**AW];
  int checks = 0, failures = 0;
  int src [DW] = '{0, 0, 2, 3, 4, 5, 6, 7, 7, 7};

  dup_block #(.AW(AW), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
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

  function automatic logic [DW-1:0] route(logic [AW-1:0] a);
    logic [DW-1:0] r;
    for (int k = 0; k < DW; k++) r[k] = a[src[k]];
    return r;
  endfunction

  task automatic load(bit routing);
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk);
      b_addr  = AW'(a);
      b_wdata = routing ? route(AW'(a)) : DW'($urandom);
      b_we    = 1;
      model[a] = b_wdata;
    end
    @(negedge clk) b_we = 0;
  endtask

  initial begin
    b_we = 0; b_addr = '0; b_wdata = '0; a_addr = '0;
    repeat (2) @(posedge clk);
    // random contents
    load(0);
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk);
      b_addr = AW'(a);
      a_addr = AW'(2**AW - 1 - a);
      @(negedge clk);
      check("port B read", b_q, model[a]);
      check("port A read", a_q, model[2**AW - 1 - a]);
    end
    // A port latency: data follows the address by exactly one clock
    @(negedge clk) a_addr = 8'h12;
    @(negedge clk) a_addr = 8'h34;
    check("A latency 1", a_q, model[8'h12]);
    @(negedge clk);
    check("A latency 2", a_q, model[8'h34]);
    // routing matrix
    load(1);
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk) a_addr = AW'(a);
      @(negedge clk);
      check("routing", a_q, route(AW'(a)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
