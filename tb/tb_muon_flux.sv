// tb_muon_flux -- the atmospheric muon flux set-up, with the firmware at its
// full default size (100 MHz clock, 1 ms timer step, 1 s periodic period).
// Three paddles on inputs 0..2; operands i0..i2 copy them undelayed, 50 ns
// (5 clocks) wide; S0 = i0&i1 (N12), S1 = i0&i2 (N13), S2 = i1&i2 (N23),
// S3 = i0&i1&i2 (N123). A timed run of 2 ms is started through the bus and
// must end by itself after exactly 200 000 clocks. During it, random events
// hit a random subset of the paddles with up to 20 ns of skew between them
// (well inside the 50 ns window) and random single-paddle noise. After the
// run, the 3 input scalers and the 4 coincidence scalers must equal the
// counts worked out here from the generated events, and the output pins must
// have pulsed that many times.
`timescale 1ns/1ps
module tb_muon_flux;
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
  longint run_cycles = 0;

  uctm_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    for (int j = 0; j < N_OUT; j++) if (trig_out[j] && !pin_prev[j]) pin_edges[j]++;
    pin_prev = trig_out;
    if (run_out) run_cycles++;
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

  function automatic logic [N_EQ-1:0] eqs(logic [N_DUP-1:0] i);
    logic [N_EQ-1:0] s = '0;
    s[0] = i[0] & i[1];
    s[1] = i[0] & i[2];
    s[2] = i[1] & i[2];
    s[3] = i[0] & i[1] & i[2];
    return s;
  endfunction

  initial begin
    logic [BUS_DW-1:0] d;
    int src [N_DUP];
    int n_in [3], n_eq [4];
    int events = 0;
    src = '{0, 1, 2, 2, 4, 5, 6, 7, 7, 7};    // "channel to copy" column of the set-up
    n_in = '{default: 0}; n_eq = '{default: 0}; pin_edges = '{default: 0};
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // configuration, as the control software would write it
    for (int a = 0; a < 256; a++) begin
      logic [N_DUP-1:0] w;
      for (int k = 0; k < N_DUP; k++) w[k] = a[src[k]];
      wr(DUP_BASE + BUS_AW'(a), BUS_DW'(w));
    end
    for (int a = 0; a < 1024; a++) wr(LUT_BASE + BUS_AW'(a), BUS_DW'(eqs(N_DUP'(a))));
    for (int k = 0; k < N_DUP; k++) begin
      wr(DLY_BASE + BUS_AW'(k), 0);
      wr(WID_BASE + BUS_AW'(k), 5);           // 50 ns
    end
    wr(REG_DUR, 2);                           // 2 ms timed run
    wr(REG_CTRL, 32'h4);                      // clear counters
    run_cycles = 0;
    wr(REG_CTRL, 32'h1);                      // start
    // events until shortly before the run ends (200 000 clocks = 2 ms)
    while ($time < 64'd1_950_000) begin
      logic [2:0] hit;
      int skew [3];
      repeat ($urandom_range(60, 400)) @(negedge clk);
      hit = 3'($urandom);
      if (hit == 0) continue;
      events++;
      for (int p = 0; p < 3; p++) skew[p] = $urandom_range(0, 20);
      // each hit paddle rises after its own skew and stays high 30 ns
      fork
        for (int p = 0; p < 3; p++) begin
          automatic int pp = p;
          fork
            if (hit[pp]) begin
              #(skew[pp]) in_disc[pp] = 1;
              #30 in_disc[pp] = 0;
            end
          join_none
        end
      join
      #60;
      for (int p = 0; p < 3; p++) if (hit[p]) n_in[p]++;
      if (hit[0] && hit[1]) n_eq[0]++;
      if (hit[0] && hit[2]) n_eq[1]++;
      if (hit[1] && hit[2]) n_eq[2]++;
      if (hit == 3'b111)    n_eq[3]++;
    end
    while (run_out) @(negedge clk);
    repeat (20) @(negedge clk);
    check("run length (clocks)", run_cycles, 200_000);
    for (int p = 0; p < 3; p++) begin
      rd(CNT_IN_BASE + BUS_AW'(p), d); check($sformatf("input scaler %0d", p), d, n_in[p]);
    end
    for (int j = 0; j < 4; j++) begin
      rd(CNT_OUT_BASE + BUS_AW'(j), d); check($sformatf("coincidence scaler S%0d", j), d, n_eq[j]);
      check($sformatf("pin S%0d pulses", j), pin_edges[j], n_eq[j]);
    end
    rd(REG_ELAPS, d); check("elapsed ms", d, 2);
    $display("events=%0d N12=%0d N13=%0d N23=%0d N123=%0d", events, n_eq[0], n_eq[1], n_eq[2], n_eq[3]);
    checks++;
    if (n_eq[3] == 0) begin failures++; $display("no triple coincidence generated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
