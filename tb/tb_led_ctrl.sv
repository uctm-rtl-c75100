// tb_led_ctrl -- LED pulse stretcher: with a hold of 20 clocks, a one-clock
// pulse lights the LED for 20 + 20 clocks (one hold per edge), a steady
// level leaves it dark, and a signal that keeps toggling keeps it lit.
// Every cycle is compared with a reference hold counter per channel.
`timescale 1ns/1ps
module tb_led_ctrl;
  localparam int N = 3, HOLD = 20;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] act, led;
  int checks = 0, failures = 0;
  int hold_ref [N];
  logic [N-1:0] act_prev = '0;
  int lit_cycles = 0;

  led_ctrl #(.N(N), .HOLD(HOLD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    logic [N-1:0] exp;
    for (int i = 0; i < N; i++) begin
      if (act[i] != act_prev[i]) hold_ref[i] = HOLD;
      else if (hold_ref[i] > 0) hold_ref[i]--;
      exp[i] = hold_ref[i] > 0;
    end
    act_prev = act;
    #1;
    checks++;
    if (led !== exp) begin
      failures++;
      if (failures < 10) $display("%t led=%b exp=%b", $time, led, exp);
    end
    if (led[0]) lit_cycles++;
  end

  initial begin
    hold_ref = '{default: 0};
    act = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // channel 0: single short pulse
    @(negedge clk) act[0] = 1;
    @(negedge clk) act[0] = 0;
    repeat (60) @(negedge clk);
    checks++;
    if (lit_cycles != HOLD + 1) begin
      failures++; $display("short pulse lit %0d cycles, expected %0d", lit_cycles, HOLD + 1);
    end
    // channel 1 steady high, channel 2 toggles every 7 cycles
    act[1] = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      if (n % 7 == 0) act[2] = ~act[2];
    end
    checks++;
    if (led[1] !== 0 || led[2] !== 1) begin
      failures++; $display("steady/toggling: led=%b", led);
    end
    repeat (50) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
