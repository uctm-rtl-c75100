// tb_run_timer -- run control with a shortened millisecond (10 clocks) and a
// shortened periodic-reset period (5 ms = 50 clocks).
// Checks: a timed run of 3 ms lasts exactly 30 clocks and elapsed_ms ends at
// 3; duration 0 runs free until `stop`; `stop` ends a timed run early; a new
// `start` restarts the count; tick_1s is one clock wide, comes every 50
// clocks only while periodic_en is set.
`timescale 1ns/1ps
module tb_run_timer;
  localparam int CYC = 10, PER = 5;
  logic clk = 0, rst_n = 0, start = 0, stop = 0, periodic_en = 0;
  logic [31:0] duration_ms, elapsed_ms;
  logic run, tick_1s;
  int checks = 0, failures = 0;
  int run_cycles = 0, ticks = 0;

  run_timer #(.CYC_PER_MS(CYC), .MS_PER_PERIOD(PER)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    #1;
    if (run) run_cycles++;
    if (tick_1s) ticks++;
  end

  initial begin
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic pulse_start();
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
  endtask

  initial begin
    duration_ms = 3;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    check("idle", run, 0);
    // timed run
    run_cycles = 0;
    pulse_start();
    repeat (60) @(negedge clk);
    check("timed run length", run_cycles, 3 * CYC);
    check("elapsed", elapsed_ms, 3);
    // free running
    duration_ms = 0;
    run_cycles = 0;
    pulse_start();
    repeat (123) @(negedge clk);
    check("free run still on", run, 1);
    check("free run elapsed", elapsed_ms, 12);
    @(negedge clk) stop = 1;
    @(negedge clk) stop = 0;
    check("stopped", run, 0);
    check("free run length", run_cycles, 125);
    // stop cuts a timed run short
    duration_ms = 100;
    run_cycles = 0;
    pulse_start();
    repeat (25) @(negedge clk);
    @(negedge clk) stop = 1;
    @(negedge clk) stop = 0;
    check("early stop length", run_cycles, 27);
    // periodic tick
    ticks = 0;
    repeat (200) @(negedge clk);
    check("no tick when disabled", ticks, 0);
    pulse_start();      // realigns the period
    periodic_en = 1;
    ticks = 0;
    repeat (CYC * PER * 4) @(negedge clk);
    check("ticks in 4 periods", ticks, 4);
    // tick width: exactly one clock
    while (!tick_1s) @(negedge clk);
    @(negedge clk);
    check("tick width", tick_1s, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
