// tb_periodic_rate -- the one-second periodic counter reset at full size
// (100 MHz clock, 1 ms = 100 000 clocks, period 1000 ms).
// With the periodic reset enabled and a free-running run started, input 3
// receives 1234 pulses in the first second. Checks: during the first second
// the scaler reads the held value (0, nothing held yet); just after the
// first second it reads 1234; 56 more pulses leave that reading unchanged;
// the elapsed time reads whole milliseconds; with the periodic reset turned
// off the scaler reads the live count, 56, which shows the counter was
// cleared at the second and kept counting.
`timescale 1ns/1ps
module tb_periodic_rate;
  import uctm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [N_IN-1:0] in_disc = '0;
  logic [N_OUT-1:0] trig_out, led_out;
  logic run_out, led_dead, led_run;
  logic [N_IN-1:0] led_in;
  logic [BUS_AW-1:0] bus_addr = '0;
  logic [BUS_DW-1:0] bus_wdata = '0, bus_rdata;
  logic bus_we = 0, bus_re = 0, bus_rvalid;
  int checks = 0, failures = 0;

  uctm_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1500ms;
    failures++;
    $display("watchdog expired");
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

  task automatic wr(logic [BUS_AW-1:0] a, logic [BUS_DW-1:0] d);
    @(negedge clk) bus_addr = a; bus_wdata = d; bus_we = 1;
    @(negedge clk) bus_we = 0;
  endtask

  task automatic rd(logic [BUS_AW-1:0] a, output logic [BUS_DW-1:0] d);
    @(negedge clk) bus_addr = a; bus_re = 1;
    @(negedge clk) bus_re = 0;
    d = bus_rdata;
  endtask

  task automatic pulses(int n);
    for (int p = 0; p < n; p++) begin
      #37 in_disc[3] = 1;
      #15 in_disc[3] = 0;
    end
  endtask

  initial begin
    logic [BUS_DW-1:0] d;
    longint t0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wr(REG_CTRL, 32'h4);
    wr(REG_CTRL, 32'h8 | 32'h1);        // periodic reset on, start
    t0 = $time;
    pulses(1234);
    #1ms;
    rd(CNT_IN_BASE + 3, d); check("held before the first second", d, 0);
    #(1000ms - ($time - t0) + 1ms);     // just past the first second
    rd(CNT_IN_BASE + 3, d); check("first-second total", d, 1234);
    pulses(56);
    rd(CNT_IN_BASE + 3, d); check("held value stays", d, 1234);
    rd(REG_ELAPS, d);       check("elapsed ms", d, 1001);
    wr(REG_CTRL, 32'h0);                // periodic off: live count
    rd(CNT_IN_BASE + 3, d); check("live count after the clear", d, 56);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
