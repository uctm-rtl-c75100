// tb_delay_shaper -- one delay/shaping element against a cycle-level
// reference model.
// The reference: a rising edge seen on clock edge n, when the element is
// free, makes `out` high after clock edges n+d .. n+d+w-1 (w = 1 when the
// width setting is 0) and `busy` high after edges n .. n+d+w-1; an edge seen
// while busy (up to and including edge n+d+w) is ignored.
// Directed cases: delay 0 / width 1, the 0-width rule, both settings at their
// maximum of 2^13-1 cycles, pulse shortening and lengthening. Then random
// settings with random input traffic, so that many edges land in dead time.
`timescale 1ns/1ps
module tb_delay_shaper;
  import uctm_pkg::*;
  logic clk = 0, rst_n = 0;
  shape_cfg_t cfg;
  logic in, out, busy;
  int checks = 0, failures = 0;
  longint cyc = 0;
  longint acc_n = -1000, last_end = -1;   // reference state
  int ignored = 0, accepted = 0;
  logic in_prev = 0;

  delay_shaper dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model, evaluated just after every rising clock edge
  always @(posedge clk) if (rst_n) begin
    int d, w;
    cyc++;
    d = int'(cfg.delay);
    w = (cfg.width == 0) ? 1 : int'(cfg.width);
    if (in && !in_prev) begin
      if (cyc > last_end) begin
        acc_n = cyc; last_end = cyc + d + w; accepted++;
      end else ignored++;
    end
    in_prev = in;
    #1;
    checks++;
    if (out !== (cyc >= acc_n + d && cyc < last_end) ||
        busy !== (cyc >= acc_n && cyc < last_end)) begin
      failures++;
      if (failures < 10)
        $display("cycle %0d: out=%b busy=%b, edge at %0d d=%0d w=%0d", cyc, out, busy, acc_n, d, w);
    end
  end

  task automatic pulse(int len);
    @(negedge clk) in = 1;
    repeat (len) @(negedge clk);
    in = 0;
  endtask

  task automatic set(int d, int w);
    // settings change only while the element is idle
    while (busy) @(negedge clk);
    @(negedge clk);
    cfg.delay = dly_t'(d); cfg.width = dly_t'(w);
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    in = 0; cfg.delay = '0; cfg.width = dly_t'(1);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    set(0, 1);    pulse(1);  wait_idle();
    set(0, 0);    pulse(3);  wait_idle();
    set(10, 3000); pulse(2); wait_idle();   // 100 ns delay, 30 us gate
    set(0, 2);    pulse(40); wait_idle();   // shortening: 40 -> 2
    set(3, 50);   pulse(1);  wait_idle();   // lengthening: 1 -> 50
    set(8191, 8191); pulse(5); repeat (100) @(negedge clk); pulse(5); wait_idle();
    // edge exactly when the pulse ends and right after it
    set(2, 3);    pulse(1); repeat (4) @(negedge clk); pulse(1); pulse(1); wait_idle();
    // random traffic
    for (int r = 0; r < 60; r++) begin
      set($urandom_range(0, 20), $urandom_range(0, 20));
      repeat ($urandom_range(50, 300)) @(negedge clk) in = ($urandom_range(0, 3) == 0);
      in = 0;
    end
    wait_idle();
    checks++;
    if (ignored == 0 || accepted < 20) begin
      failures++;
      $display("traffic too thin: accepted=%0d ignored=%0d", accepted, ignored);
    end
    $display("accepted %0d edges, ignored %0d during dead time", accepted, ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
