// delay_cell: behavioural model of one voltage-controlled delay element.
//
// This is a behavioural model of an analog full-custom cell, not
// synthesizable logic. The same cell is used in the DLL's reference line
// and in the MPWM signal path, so once the DLL has set the control voltage
// vc, every cell on the chip delays by one sixteenth of a clock period.
// The delay law, TAU0_NS - KV_NS * vc (floored at 50 ps), and the numbers
// are this model's; the paper gives no cell characteristics. Delay is
// transport delay: every input edge reaches the output, in order.
module delay_cell #(
  parameter real TAU0_NS = 0.9,   // delay at vc = 0
  parameter real KV_NS   = 0.5    // delay decrease per volt
) (
  input  logic a,
  input  real  vc,
  output logic y
);
  timeunit 1ns; timeprecision 1ps;

  real tau;
  always_comb tau = (TAU0_NS - KV_NS * vc < 0.05) ? 0.05 : TAU0_NS - KV_NS * vc;

  initial y = 1'b0;

  always @(a) begin
    fork
      automatic logic v  = a;
      automatic real  dl = tau;
      begin
        #(dl) y = v;
      end
    join_none
  end

endmodule
