// phase_mux: selects one of the delay-line phases P0..P(STAGES-1).
//
// The chip's HR-MPWM picks the required fine phase with a multiplexer that
// has the same delay in every branch. This RTL builds it as a balanced tree
// of 2:1 multiplexers, log2(STAGES) levels deep, so every input passes the
// same number of stages; sel bit 0 steers the first level. It is purely
// combinational: out follows p[d_ctrl].
module phase_mux #(
  parameter int unsigned STAGES = 16,
  localparam int unsigned SW = $clog2(STAGES)
) (
  input  logic [STAGES-1:0] p,
  input  logic [SW-1:0]     d_ctrl,
  output logic              out
);
  timeunit 1ns; timeprecision 1ps;

  // level[l] holds STAGES >> l signals; level[0] is the taps.
  logic [STAGES-1:0] level [SW+1];

  always_comb begin
    for (int unsigned l = 0; l <= SW; l++) level[l] = '0;
    level[0] = p;
    for (int unsigned l = 0; l < SW; l++)
      for (int unsigned i = 0; i < (STAGES >> (l + 1)); i++)
        level[l+1][i] = d_ctrl[l] ? level[l][2*i+1] : level[l][2*i];
  end

  assign out = level[SW][0];

endmodule
