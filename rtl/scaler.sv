// scaler -- one activity counter, clocked by the signal it counts.
//
// Every rising edge of `sig` while `en` is high increments `count`; `clr`
// (active high) clears it asynchronously. The counter wraps at 2^W. Used by
// scaler_bank, which also handles readout on the system clock.
module scaler #(
  parameter int unsigned W = uctm_pkg::CNT_W
) (
  input  logic         sig,
  input  logic         clr,
  input  logic         en,
  output logic [W-1:0] count
);

  always_ff @(posedge sig or posedge clr) begin
    if (clr)     count <= '0;
    else if (en) count <= count + 1'b1;
  end

endmodule
