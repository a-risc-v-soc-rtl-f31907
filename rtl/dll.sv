// dll: behavioural model of the delay-locked loop that calibrates the
// delay cells.
//
// Behavioural model of an analog block. A reference vcdl of STAGES cells
// delays the clock; a phase detector (PD) compares the delayed clock with
// the clock and a charge pump (CP) moves the control voltage vc until the
// line delay equals one clock period. Each cell then delays by
// T_clk/STAGES, and the same vc drives the cells of the MPWM signal path.
// PD, CP, the reference line and the shared vc follow the paper's DLL
// figure. The model's own choices: the PD is a bang-bang detector that
// samples the line output on each rising clock edge (high: line too short,
// so vc is lowered to slow the cells; low: too long, vc is raised); the CP
// moves vc by VC_STEP per clock; vc starts at VC_INIT after reset, which
// must put the line delay between half and one and a half periods.
// locked goes high once the PD decision has reversed LOCK_COUNT times since
// reset: a loop still slewing towards lock never reverses, one that dithers
// around the lock point reverses every clock or two. locked then stays high
// until reset.
module dll #(
  parameter int unsigned STAGES     = 16,
  parameter real         VC_STEP    = 0.002,
  parameter real         VC_INIT    = 0.0,
  parameter int unsigned LOCK_COUNT = 4
) (
  input  logic clk,
  input  logic rst_n,
  output real  vc,
  output logic locked
);
  timeunit 1ns; timeprecision 1ps;

  logic [STAGES-1:0] taps;
  logic              pd_late_prev;
  int unsigned       alternations;

  vcdl #(.STAGES(STAGES)) u_ref_line (.in(clk), .vc(vc), .p(taps));

  initial begin
    vc           = VC_INIT;
    locked       = 1'b0;
    alternations = 0;
    pd_late_prev = 1'b0;
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vc           <= VC_INIT;
      locked       <= 1'b0;
      alternations <= 0;
      pd_late_prev <= 1'b0;
    end else begin
      // taps[STAGES-1] high: the delayed edge already arrived (too short).
      vc           <= taps[STAGES-1] ? vc - VC_STEP : vc + VC_STEP;
      pd_late_prev <= taps[STAGES-1];
      if (taps[STAGES-1] != pd_late_prev && alternations < LOCK_COUNT)
        alternations <= alternations + 1;
      if (alternations >= LOCK_COUNT) locked <= 1'b1;
    end
  end

endmodule
