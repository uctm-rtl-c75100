// tb_input_sync -- checks that the input synchronizer delays its input by
// exactly two clock cycles, bit for bit, with random input patterns.
`timescale 1ns/1ps
module tb_input_sync;
  localparam int W = 8;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] d, q;
  int checks = 0, failures = 0;
  logic [W-1:0] hist [3];

  input_sync #(.W(W)) dut (.clk(clk), .rst_n(rst_n), .d(d), .q(q));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    hist = '{default: '0};
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      // q now shows the value driven two rising edges ago
      if (n >= 2) begin
        checks++;
        if (q !== hist[1]) begin
          failures++;
          $display("mismatch at %0d: q=%h expected %h", n, q, hist[1]);
        end
      end
      hist[1] = hist[0];
      d = W'($urandom);
      hist[0] = d;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
