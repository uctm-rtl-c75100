// tb_uctm_top -- end-to-end test of the trigger firmware through its bus.
// Runs with a shortened millisecond (20 clocks), a 10 ms periodic-reset
// period and a 50-clock LED hold; everything else at its normal size.
// Phases:
//  1. latency: identity routing, delay 0, S0 = i0; an edge on input 0 must
//     reach trig_out[0] four clocks after the first input register takes it.
//  2. equations: all 8 equations of the example GUI screen (i0, i0&i1,
//     !(i2^i3), sup(i0,i2,i7;2), (i0&i1)|i4, i0 nand i6, i0 nor i6,
//     i0 xnor i5); random input patterns with a common edge; trig_out and
//     every input and output scaler checked against a reference.
//  3. muon-lifetime style coincidence: input 0 copied to i0 (2 clocks wide)
//     and i1 (delayed 10, 300 clocks wide), S1 = i0 & i1; a single pulse
//     must not trigger itself, a second one inside the gate must; that
//     second pulse arrives while the gate channel is busy and is ignored by
//     it. S2 = i1 makes the gate visible on an output pin.
//  4. shaping shortens (long input, 2-clock output) and lengthens.
//  5. timed run: 3 ms run ends by itself after 60 clocks; trig_out and the
//     scalers are silent afterwards.
//  6. counter clear command, periodic reset (held counts of one period),
//     pulses faster than the clock counted by the input scalers, LEDs.
// Each mechanism is counted and a failure is recorded for one never seen.
`timescale 1ns/1ps
module tb_uctm_top;
  import uctm_pkg::*;
  localparam int CYC = 20, PER = 10, HOLD = 50;
  logic clk = 0, rst_n = 0;
  logic [N_IN-1:0] in_disc = '0;
  logic [N_OUT-1:0] trig_out, led_out;
  logic run_out, led_dead, led_run;
  logic [N_IN-1:0] led_in;
  logic [BUS_AW-1:0] bus_addr = '0;
  logic [BUS_DW-1:0] bus_wdata = '0, bus_rdata;
  logic bus_we = 0, bus_re = 0, bus_rvalid;
  int checks = 0, failures = 0;

  // mechanism counters
  int m_latency = 0, m_route = 0, m_equation = 0, m_delay = 0, m_widen = 0,
      m_shorten = 0, m_deadtime = 0, m_timed_end = 0, m_gated = 0,
      m_clear = 0, m_periodic = 0, m_fast = 0, m_led = 0;

  uctm_top #(.CYC_PER_MS(CYC), .MS_PER_PERIOD(PER), .LED_HOLD(HOLD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- helpers ------------------------------------------------------------
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d (0x%0h) expected %0d", what, got, got, exp);
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

  task automatic load_routing(int src [N_DUP]);
    for (int a = 0; a < 256; a++) begin
      logic [N_DUP-1:0] w;
      for (int k = 0; k < N_DUP; k++) w[k] = a[src[k]];
      wr(DUP_BASE + BUS_AW'(a), BUS_DW'(w));
    end
  endtask

  // equation sets; bit j of the word = equation j
  function automatic logic [N_EQ-1:0] eqs(int set, logic [N_DUP-1:0] i);
    logic [N_EQ-1:0] s = '0;
    if (set == 0) begin
      s[0] = i[0];
      s[1] = i[0] & i[1];
      s[2] = !(i[2] ^ i[3]);
      s[3] = (int'(i[0]) + int'(i[2]) + int'(i[7])) >= 2;
      s[4] = (i[0] & i[1]) | i[4];
      s[5] = !(i[0] & i[6]);
      s[6] = !(i[0] | i[6]);
      s[7] = !(i[0] ^ i[5]);
    end else begin
      s[0] = i[0];
      s[1] = i[0] & i[1];
      s[2] = i[1];          // the gate itself, for observation
    end
    return s;
  endfunction

  task automatic load_lut(int set);
    for (int a = 0; a < 1024; a++) wr(LUT_BASE + BUS_AW'(a), BUS_DW'(eqs(set, N_DUP'(a))));
  endtask

  task automatic shape(int k, int d, int w);
    wr(DLY_BASE + BUS_AW'(k), BUS_DW'(d));
    wr(WID_BASE + BUS_AW'(k), BUS_DW'(w));
  endtask

  task automatic ctrl(logic [31:0] v);
    wr(REG_CTRL, v);
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  // the dead-time LED must light at some point
  int dead_led_seen = 0;
  always @(posedge clk) if (led_dead) dead_led_seen++;

  // rising edges of every output pin while observing
  int trig_edges [N_OUT];
  logic [N_OUT-1:0] trig_prev = '0;
  always @(posedge clk) begin
    #1;
    for (int j = 0; j < N_OUT; j++) if (trig_out[j] && !trig_prev[j]) trig_edges[j]++;
    trig_prev = trig_out;
  end

  // ---- test ---------------------------------------------------------------
  initial begin
    logic [BUS_DW-1:0] d;
    int id_src [N_DUP] = '{0, 1, 2, 3, 4, 5, 6, 7, 7, 7};
    int mu_src [N_DUP] = '{0, 0, 2, 3, 4, 5, 6, 7, 7, 7};
    int exp_in [N_IN], exp_out [N_EQ];
    int n;
    trig_edges = '{default: 0};
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // 1. latency -------------------------------------------------------------
    load_routing(id_src);
    load_lut(0);
    for (int k = 0; k < N_DUP; k++) shape(k, 0, 1);
    ctrl(32'h4);             // clear counters
    ctrl(32'h1);             // start, free running
    idle(5);
    @(negedge clk) in_disc[0] = 1;
    @(posedge clk);          // first input register takes the edge here
    n = 0;
    do begin
      @(posedge clk); #1; n++;
    end while (!trig_out[0] && n < 20);
    check("latency (clocks)", n, 4);
    if (n == 4) m_latency++;
    idle(3);
    check("S0 pulse width 1", trig_out[0], 0);
    @(negedge clk) in_disc[0] = 0;
    idle(10);
    ctrl(32'h2);             // stop
    ctrl(32'h4);             // clear
    idle(5);

    // 2. equations over random patterns -------------------------------------
    for (int k = 0; k < N_DUP; k++) shape(k, 0, 30);
    exp_in = '{default: 0}; exp_out = '{default: 0};
    ctrl(32'h1);
    idle(5);
    for (int t = 0; t < 60; t++) begin
      logic [N_IN-1:0] p;
      logic [N_DUP-1:0] ops;
      logic [N_EQ-1:0] e0, e1;
      p = N_IN'($urandom);
      if (t == 0) p = 8'h01;
      for (int k = 0; k < N_DUP; k++) ops[k] = p[id_src[k]];
      e0 = eqs(0, '0);
      e1 = eqs(0, ops);
      @(negedge clk) in_disc = p;
      idle(12);
      check("trig_out pattern", trig_out, e1[N_OUT-1:0]);
      if (p[7] && ops[8] && ops[9]) m_route++;
      if (e1 != e0) m_equation++;
      for (int i = 0; i < N_IN; i++) if (p[i]) exp_in[i]++;
      for (int j = 0; j < N_EQ; j++) if (e1[j] != e0[j]) exp_out[j]++;
      idle(30);
      @(negedge clk) in_disc = '0;
      idle(3);
    end
    ctrl(32'h2);
    idle(5);
    for (int i = 0; i < N_IN; i++) begin
      rd(CNT_IN_BASE + BUS_AW'(i), d); check("input scaler", d, exp_in[i]);
    end
    for (int j = 0; j < N_EQ; j++) begin
      rd(CNT_OUT_BASE + BUS_AW'(j), d); check("output scaler", d, exp_out[j]);
    end
    ctrl(32'h4);
    idle(5);
    for (int j = 0; j < N_EQ; j++) begin
      rd(CNT_OUT_BASE + BUS_AW'(j), d); check("cleared scaler", d, 0);
    end
    m_clear++;

    // 3. coincidence with delayed gate -----------------------------------------
    load_routing(mu_src);
    load_lut(1);
    shape(0, 0, 2);
    shape(1, 10, 300);
    ctrl(32'h1);
    idle(5);
    trig_edges = '{default: 0};
    @(negedge clk) in_disc[0] = 1;
    idle(4);
    in_disc[0] = 0;
    idle(8);
    // i1 is still in its delay: 4 + 4 + 8 = 16 clocks after the edge
    check("gate not yet open", trig_out[2], 0);
    idle(6);
    check("gate open after delay", trig_out[2], 1);
    if (trig_out[2]) m_delay++;
    idle(100);
    check("no self coincidence", trig_edges[1], 0);
    @(negedge clk) in_disc[0] = 1;   // second pulse, inside the gate
    idle(4);
    in_disc[0] = 0;
    idle(10);
    check("coincidence triggers S1", trig_edges[1], 1);
    rd(REG_STAT, d);
    check("gate channel busy (dead time)", d[3], 1);
    check("dead-time status", d[1], 1);
    check("gate opened once only", trig_edges[2], 1);
    if (trig_edges[1] == 1 && d[3] && trig_edges[2] == 1) m_deadtime++;
    idle(250);
    check("gate closed after 300", trig_out[2], 0);
    if (!trig_out[2]) m_widen++;
    check("S0 edges", trig_edges[0], 2);

    // 4. shortening: 40-clock input -> 2-clock i0 --------------------------------
    idle(20);
    trig_edges = '{default: 0};
    begin
      int hi = 0;
      @(negedge clk) in_disc[0] = 1;
      for (int c = 0; c < 50; c++) begin
        @(posedge clk); #1;
        if (trig_out[0]) hi++;
      end
      in_disc[0] = 0;
      check("shortened width", hi, 2);
      if (hi == 2) m_shorten++;
    end
    idle(400);
    ctrl(32'h2);
    idle(5);

    // 5. timed run --------------------------------------------------------------
    wr(REG_DUR, 3);
    ctrl(32'h4);
    begin
      int run_len = 0;
      @(negedge clk) bus_addr = REG_CTRL; bus_wdata = 32'h1; bus_we = 1;
      @(negedge clk) bus_we = 0;
      for (int c = 0; c < 100; c++) begin
        @(posedge clk); #1;
        if (run_out) run_len++;
      end
      check("timed run length", run_len, 3 * CYC);
      if (run_len == 3 * CYC && !run_out) m_timed_end++;
      rd(REG_ELAPS, d); check("elapsed ms", d, 3);
      rd(REG_STAT, d);  check("status run bit", d[0], 0);
    end
    trig_edges = '{default: 0};
    @(negedge clk) in_disc[0] = 1;
    idle(10);
    in_disc[0] = 0;
    idle(10);
    check("no trigger after run", trig_edges[0], 0);
    rd(CNT_IN_BASE, d); check("no count after run", d, 0);
    if (trig_edges[0] == 0 && d == 0) m_gated++;
    wr(REG_DUR, 0);

    // 6. periodic reset and fast pulses -----------------------------------------
    idle(HOLD + 5);
    check("input LED dark", led_in[0], 0);
    ctrl(32'h8 | 32'h1);     // periodic on, start (realigns the period)
    idle(3);
    for (int p = 0; p < 37; p++) begin
      #2 in_disc[1] = 1;
      #2 in_disc[1] = 0;     // 250 MHz bursts
    end
    idle(2);
    check("input LED lit", led_in[1], 1);
    if (led_in[1] && dead_led_seen > 0) m_led++;
    // wait for the end of the first period
    idle(CYC * PER);
    rd(CNT_IN_BASE + 1, d);
    check("held count of one period", d, 37);
    if (d == 37) begin m_periodic++; m_fast++; end
    idle(CYC * PER);
    rd(CNT_IN_BASE + 1, d);
    check("next period empty", d, 0);
    ctrl(32'h2);
    idle(5);

    // mechanism census --------------------------------------------------------
    $display("latency=%0d route=%0d equation=%0d delay=%0d widen=%0d shorten=%0d deadtime=%0d",
             m_latency, m_route, m_equation, m_delay, m_widen, m_shorten, m_deadtime);
    $display("timed_end=%0d gated=%0d clear=%0d periodic=%0d fast=%0d led=%0d",
             m_timed_end, m_gated, m_clear, m_periodic, m_fast, m_led);
    begin
      int ms [13];
      ms = '{m_latency, m_route, m_equation, m_delay, m_widen, m_shorten, m_deadtime,
                      m_timed_end, m_gated, m_clear, m_periodic, m_fast, m_led};
      for (int i = 0; i < 13; i++) begin
        checks++;
        if (ms[i] == 0) begin failures++; $display("mechanism %0d never exercised", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
