// tb_uctm_regs -- micro-controller register interface.
// The two memory B ports are modelled here by small arrays with one-clock
// read latency. Checks: writes in each memory region reach the right port
// with the right address and data and read back; delay/width registers
// land in the right channel and read back; control writes give one-clock
// start/stop/clear pulses and a level periodic enable; duration, status and
// elapsed time read back; scalers read live counts, or the held counts
// while the periodic enable is set; bus_rvalid follows bus_re by one clock.
`timescale 1ns/1ps
module tb_uctm_regs;
  import uctm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [BUS_AW-1:0] bus_addr;
  logic [BUS_DW-1:0] bus_wdata, bus_rdata;
  logic bus_we, bus_re, bus_rvalid;
  logic [N_IN-1:0] dup_addr;
  logic [N_DUP-1:0] dup_wdata, dup_q;
  logic dup_we;
  logic [N_DUP-1:0] lut_addr;
  logic [N_EQ-1:0] lut_wdata, lut_q;
  logic lut_we;
  shape_cfg_t [N_DUP-1:0] shape_cfg;
  logic start, stop, clear, periodic_en;
  logic [DUR_W-1:0] duration_ms, elapsed_ms;
  logic run, dead;
  logic [N_DUP-1:0] busy;
  logic [N_IN-1:0][CNT_W-1:0] cnt_in, held_in;
  logic [N_EQ-1:0][CNT_W-1:0] cnt_out, held_out;
  int checks = 0, failures = 0;
  int n_start = 0, n_stop = 0, n_clear = 0;
  logic [N_DUP-1:0] dup_mem [256];
  logic [N_EQ-1:0]  lut_mem [1024];

  uctm_regs dut (.*);

  always #5 clk = ~clk;

  // memory models for the two B ports
  always @(posedge clk) begin
    if (dup_we) dup_mem[dup_addr] <= dup_wdata;
    if (lut_we) lut_mem[lut_addr] <= lut_wdata;
    dup_q <= dup_mem[dup_addr];
    lut_q <= lut_mem[lut_addr];
    #1;
    if (start) n_start++;
    if (stop)  n_stop++;
    if (clear) n_clear++;
  end

  initial begin
    #200us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic wr(logic [BUS_AW-1:0] a, logic [BUS_DW-1:0] d);
    @(negedge clk) bus_addr = a; bus_wdata = d; bus_we = 1;
    @(negedge clk) bus_we = 0;
  endtask

  task automatic rd(logic [BUS_AW-1:0] a, output logic [BUS_DW-1:0] d);
    @(negedge clk) bus_addr = a; bus_re = 1;
    @(negedge clk) bus_re = 0;
    checks++;
    if (!bus_rvalid) begin failures++; $display("rvalid missing"); end
    d = bus_rdata;
  endtask

  initial begin
    logic [BUS_DW-1:0] d;
    bus_addr = '0; bus_wdata = '0; bus_we = 0; bus_re = 0;
    run = 0; dead = 0; busy = '0; elapsed_ms = '0;
    for (int i = 0; i < 8; i++) begin
      cnt_in[i] = CNT_W'(100 + i); held_in[i] = CNT_W'(200 + i);
      cnt_out[i] = CNT_W'(300 + i); held_out[i] = CNT_W'(400 + i);
    end
    for (int i = 0; i < 256; i++) dup_mem[i] = '0;
    for (int i = 0; i < 1024; i++) lut_mem[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // reset values
    for (int k = 0; k < N_DUP; k++) begin
      check("reset delay", shape_cfg[k].delay, 0);
      check("reset width", shape_cfg[k].width, 1);
    end
    // memories
    wr(DUP_BASE + 12'h05, 32'h3a5);
    wr(DUP_BASE + 12'hff, 32'h1ff);
    wr(LUT_BASE + 12'h000, 32'h81);
    wr(LUT_BASE + 12'h3ff, 32'h7e);
    check("dup model 05", dup_mem[5], 10'h3a5);
    check("dup model ff", dup_mem[255], 10'h1ff);
    check("lut model 000", lut_mem[0], 8'h81);
    check("lut model 3ff", lut_mem[1023], 8'h7e);
    rd(DUP_BASE + 12'h05, d); check("dup read", d, 32'h3a5);
    rd(LUT_BASE + 12'h3ff, d); check("lut read", d, 32'h7e);
    rd(12'h200, d); check("hole read", d, 0);
    // delays and widths
    for (int k = 0; k < N_DUP; k++) begin
      wr(DLY_BASE + BUS_AW'(k), 32'(k * 101));
      wr(WID_BASE + BUS_AW'(k), 32'(8191 - k));
    end
    for (int k = 0; k < N_DUP; k++) begin
      check("delay cfg", shape_cfg[k].delay, k * 101);
      check("width cfg", shape_cfg[k].width, 8191 - k);
      rd(DLY_BASE + BUS_AW'(k), d); check("delay read", d, k * 101);
      rd(WID_BASE + BUS_AW'(k), d); check("width read", d, 8191 - k);
    end
    // control pulses
    wr(REG_CTRL, 32'h1);
    wr(REG_CTRL, 32'h2);
    wr(REG_CTRL, 32'h4);
    wr(REG_CTRL, 32'h5);
    check("start pulses", n_start, 2);
    check("stop pulses", n_stop, 1);
    check("clear pulses", n_clear, 2);
    check("periodic off", periodic_en, 0);
    wr(REG_DUR, 32'd86400000);
    check("duration", duration_ms, 32'd86400000);
    rd(REG_DUR, d); check("duration read", d, 32'd86400000);
    run = 1; dead = 1; busy = 10'h2c1; elapsed_ms = 32'd1234;
    rd(REG_STAT, d); check("status", d, {busy, 2'b11});
    rd(REG_ELAPS, d); check("elapsed", d, 1234);
    for (int i = 0; i < 8; i++) begin
      rd(CNT_IN_BASE + BUS_AW'(i), d);  check("live in", d, 100 + i);
      rd(CNT_OUT_BASE + BUS_AW'(i), d); check("live out", d, 300 + i);
    end
    wr(REG_CTRL, 32'h8);
    check("periodic on", periodic_en, 1);
    rd(REG_CTRL, d); check("ctrl read", d, 8);
    for (int i = 0; i < 8; i++) begin
      rd(CNT_IN_BASE + BUS_AW'(i), d);  check("held in", d, 200 + i);
      rd(CNT_OUT_BASE + BUS_AW'(i), d); check("held out", d, 400 + i);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
