// tb_muon_lifetime -- the muon lifetime set-up, with the firmware at its
// full default size. The photomultiplier discriminator is on input 0; it is
// copied to i0 (no delay, 20 ns = 2 clocks wide) and to i1 (delayed 100 ns =
// 10 clocks, 30 us = 3000 clocks wide); S0 = i0 (every pulse) and
// S1 = i0 & i1 (the trigger: a second pulse inside the gate opened by the
// first). The delay keeps a pulse from coinciding with its own gate.
// Events: a muon pulse, followed after an exponentially distributed time
// (2.2 us mean) by a decay pulse, or by none for a crossing muon; plus
// directed spacings at the edges of the window. With the pulses aligned to
// the clock, a decay Delta clocks after the muon triggers exactly when
// 9 <= Delta <= 3009 (i0's 2 clocks must overlap the gate at clocks
// 10..3009 after the muon). The scalers and the S1 pin must agree with that
// count; S0 counts every pulse. A free-running run is used, stopped by the
// bus at the end.
`timescale 1ns/1ps
module tb_muon_lifetime;
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
  int pin_edges [N_OUT];
  logic [N_OUT-1:0] pin_prev = '0;

  uctm_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    for (int j = 0; j < N_OUT; j++) if (trig_out[j] && !pin_prev[j]) pin_edges[j]++;
    pin_prev = trig_out;
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

  // a 2-clock discriminator pulse starting at the current falling edge
  task automatic pmt_pulse();
    in_disc[0] = 1;
    repeat (2) @(negedge clk);
    in_disc[0] = 0;
  endtask

  initial begin
    logic [BUS_DW-1:0] d;
    int src [N_DUP];
    int pulses = 0, triggers = 0, decays = 0;
    int directed [4];
    src = '{0, 0, 2, 3, 4, 5, 6, 7, 7, 7};    // i0 and i1 both copy input 0
    directed = '{8, 9, 3009, 3010};
    pin_edges = '{default: 0};
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int a = 0; a < 256; a++) begin
      logic [N_DUP-1:0] w;
      for (int k = 0; k < N_DUP; k++) w[k] = a[src[k]];
      wr(DUP_BASE + BUS_AW'(a), BUS_DW'(w));
    end
    for (int a = 0; a < 1024; a++) wr(LUT_BASE + BUS_AW'(a), BUS_DW'({a[0] & a[1], a[0]}));
    wr(DLY_BASE + 0, 0);  wr(WID_BASE + 0, 2);       // 20 ns
    wr(DLY_BASE + 1, 10); wr(WID_BASE + 1, 3000);    // 100 ns, 30 us
    wr(REG_CTRL, 32'h4);
    wr(REG_CTRL, 32'h1);                             // free-running run
    repeat (10) @(negedge clk);
    for (int e = 0; e < 44; e++) begin
      int delta;
      if (e < 4) delta = directed[e];
      else if ($urandom_range(0, 3) == 0) delta = -1;   // crossing muon, no decay
      else begin
        real u;
        u = real'($urandom_range(1, 1_000_000)) / 1.0e6;
        delta = int'(-220.0 * $ln(u));
        if (delta < 5) delta = 5;
      end
      @(negedge clk);
      pmt_pulse();
      pulses++;
      if (delta >= 0) begin
        repeat (delta - 2) @(negedge clk);
        pmt_pulse();
        pulses++;
        decays++;
        if (delta >= 9 && delta <= 3009) triggers++;
      end
      repeat (3100) @(negedge clk);                  // let the gate close
    end
    repeat (20) @(negedge clk);
    wr(REG_CTRL, 32'h2);                             // stop
    repeat (5) @(negedge clk);
    rd(CNT_IN_BASE, d);       check("input scaler", d, pulses);
    rd(CNT_OUT_BASE + 0, d);  check("S0 scaler", d, pulses);
    rd(CNT_OUT_BASE + 1, d);  check("S1 (trigger) scaler", d, triggers);
    check("S1 pin pulses", pin_edges[1], triggers);
    check("S0 pin pulses", pin_edges[0], pulses);
    $display("pulses=%0d decays=%0d triggers=%0d", pulses, decays, triggers);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
