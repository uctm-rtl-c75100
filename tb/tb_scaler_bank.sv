// tb_scaler_bank -- activity counters clocked by their own signals.
// Each channel receives bursts of pulses at its own rate, some of them at
// 250 MHz (faster than the 100 MHz system clock). Checks: the sampled count
// equals the number of rising edges sent while `en` was high; edges sent with
// `en` low are not counted; `clr` zeroes every counter; `snap` copies the
// counts into `held`, which keeps them across a following clear.
`timescale 1ns/1ps
module tb_scaler_bank;
  localparam int N = 4, W = 24;
  logic clk = 0, rst_n = 0, clr = 1, en = 0, snap = 0;
  logic [N-1:0] sig = '0;
  logic [N-1:0][W-1:0] cnt, held;
  int checks = 0, failures = 0;
  int expn [N];

  scaler_bank #(.N(N), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // n pulses on channel i, high and low for `half` ns each
  task automatic burst(int i, int n, real half);
    for (int p = 0; p < n; p++) begin
      #(half) sig[i] = 1;
      #(half) sig[i] = 0;
      if (en) expn[i]++;
    end
  endtask

  task automatic check_counts(string what);
    repeat (4) @(posedge clk);
    #1;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (cnt[i] !== W'(expn[i])) begin
        failures++;
        $display("%s ch%0d: count %0d expected %0d", what, i, cnt[i], expn[i]);
      end
    end
  endtask

  initial begin
    expn = '{default: 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    #3 clr = 0;
    // not counting while disabled
    fork
      burst(0, 10, 7.0);
      burst(1, 5, 3.0);
    join
    check_counts("disabled");
    @(negedge clk) en = 1;
    fork
      burst(0, 100, 7.0);
      burst(1, 333, 2.0);      // 250 MHz
      burst(2, 1000, 13.0);
      burst(3, 17, 51.0);
    join
    check_counts("enabled");
    // snapshot, then clear
    @(negedge clk) snap = 1;
    @(negedge clk) snap = 0;
    #1 clr = 1;
    #3 clr = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (held[i] !== W'(expn[i])) begin
        failures++; $display("held ch%0d %0d expected %0d", i, held[i], expn[i]);
      end
      expn[i] = 0;
    end
    check_counts("cleared");
    fork
      burst(2, 40, 2.5);
      burst(3, 60, 4.0);
    join
    check_counts("after clear");
    @(negedge clk) en = 0;
    burst(3, 9, 4.0);
    check_counts("disabled again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
