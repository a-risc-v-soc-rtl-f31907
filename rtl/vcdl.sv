// vcdl: behavioural model of the voltage-controlled delay line.
//
// A chain of STAGES identical delay_cell instances sharing one control
// voltage vc. Tap p[i] is the input after i+1 cells (the paper's P0 to P15).
// Behavioural model: it holds analog cells and is not synthesizable.
module vcdl #(
  parameter int unsigned STAGES = 16
) (
  input  logic              in,
  input  real               vc,
  output logic [STAGES-1:0] p
);
  timeunit 1ns; timeprecision 1ps;

  wire [STAGES:0] chain;
  assign chain[0] = in;

  for (genvar i = 0; i < STAGES; i++) begin : g_cell
    delay_cell u_cell (.a(chain[i]), .vc(vc), .y(chain[i+1]));
  end

  assign p = chain[STAGES:1];

endmodule
