// tb_delay_shaping_block -- ten channels with different settings driven by
// random, partly shared input traffic, each against the same cycle-level
// reference as the single element (edge at clock n -> out after edges
// n+d .. n+d+w-1, edges ignored up to edge n+d+w), plus the dead-time output,
// which must equal the OR of the reference busy intervals.
`timescale 1ns/1ps
module tb_delay_shaping_block;
  import uctm_pkg::*;
  localparam int N = N_DUP;
  logic clk = 0, rst_n = 0;
  shape_cfg_t [N-1:0] cfg;
  logic [N-1:0] in, out, busy;
  logic dead;
  int checks = 0, failures = 0;
  longint cyc = 0;
  longint acc_n [N], last_end [N];
  logic [N-1:0] in_prev = '0;
  int dead_cycles = 0;

  delay_shaping_block #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    logic [N-1:0] exp_out, exp_busy;
    cyc++;
    for (int k = 0; k < N; k++) begin
      int d, w;
      d = int'(cfg[k].delay);
      w = (cfg[k].width == 0) ? 1 : int'(cfg[k].width);
      if (in[k] && !in_prev[k] && cyc > last_end[k]) begin
        acc_n[k] = cyc; last_end[k] = cyc + d + w;
      end
      exp_out[k]  = (cyc >= acc_n[k] + d && cyc < last_end[k]);
      exp_busy[k] = (cyc >= acc_n[k] && cyc < last_end[k]);
    end
    in_prev = in;
    #1;
    checks++;
    if (out !== exp_out || busy !== exp_busy || dead !== |exp_busy) begin
      failures++;
      if (failures < 10)
        $display("cycle %0d: out=%h exp %h busy=%h exp %h dead=%b", cyc, out, exp_out, busy, exp_busy, dead);
    end
    if (dead) dead_cycles++;
  end

  initial begin
    for (int k = 0; k < N; k++) begin
      acc_n[k] = -1000; last_end[k] = -1;
      cfg[k].delay = dly_t'(k * 3);
      cfg[k].width = dly_t'(1 + k * 5);
    end
    in = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // one common edge: ten different delayed/shaped copies
    @(negedge clk) in = '1;
    @(negedge clk) in = '0;
    repeat (80) @(negedge clk);
    // random traffic; channels 0-4 see the same signal, as after duplication
    for (int n = 0; n < 20000; n++) begin
      logic s;
      @(negedge clk);
      s = ($urandom_range(0, 7) == 0);
      in = {N'($urandom) & N'($urandom) & 10'h3e0, {5{s}}};
    end
    in = '0;
    repeat (100) @(negedge clk);
    checks++;
    if (dead_cycles == 0) begin failures++; $display("dead time never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
