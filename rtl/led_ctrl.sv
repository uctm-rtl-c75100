// led_ctrl -- LED controllers: activity pulse stretchers.
//
// A front-panel LED must show whether a signal is toggling, but the signals
// change for tens of nanoseconds. Each channel watches its input on the
// system clock and, on any change of level, lights its LED for HOLD clock
// cycles (50 ms at 100 MHz by default), restarting the hold time at every
// new change. A signal that stays at one level, high or low, leaves its LED
// dark once the hold time has run out.
//
// The paper only names the LED controllers and says which signals have an
// LED (8 inputs, 4 outputs, dead time, run); the stretcher and its 50 ms
// hold time are this design's own.
module led_ctrl #(
  parameter int unsigned N    = 1,
  parameter int unsigned HOLD = 5_000_000
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] act,   // monitored signals, synchronous to clk
  output logic [N-1:0] led    // LED drive, active high
);

  localparam int unsigned HW = $clog2(HOLD + 1);

  logic [N-1:0]         act_q;
  logic [N-1:0][HW-1:0] hold_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q  <= '0;
      hold_q <= '0;
    end else begin
      act_q <= act;
      for (int i = 0; i < N; i++) begin
        if (act[i] != act_q[i])   hold_q[i] <= HW'(HOLD);
        else if (hold_q[i] != '0) hold_q[i] <= hold_q[i] - 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) led[i] = (hold_q[i] != '0);
  end

endmodule
