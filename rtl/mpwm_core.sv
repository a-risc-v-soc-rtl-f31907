// mpwm_core: Modified-PWM (MPWM) generator.
//
// A free-running N-bit counter C defines the MPWM period of 2^N clocks. Its
// bits are rearranged into
//     C_R = { C[N-SF-1], ..., C[0], C[N-SF], ..., C[N-2], C[N-1] }
// i.e. the low N-SF counter bits move up to the top of C_R, and the top SF
// counter bits, in reversed order, become the low SF bits of C_R. The output
// is high while duty > C_R. The result: the period is split into SN = 2^SF
// sub-regions of 2^(N-SF) clocks, each starting with one pulse; the pulses
// together are high for exactly `duty` clocks per period, and the left-over
// duty mod SN clocks are spread over the sub-regions in bit-reversed order
// of their address. SF = 0 gives an ordinary PWM.
//
// The bit rearrangement and the comparator follow the paper's MPWM circuit.
// The paper's equation writes "duty_input >= C_R"; this module uses the
// strict compare, which is what gives the "Duty = 19" example its 19 high
// clocks and makes the mean output duty/2^N. The duty port is N bits wide
// (0 .. 2^N-1). SF is a run-time input; reset and enable are this design's.
//
// Timing: cnt, period_end and mpwm_out all follow from the counter register;
// mpwm_out is combinational from it (register it before using it as a pulse,
// as hrmpwm_ctrl does). period_end is high in the last clock of a period.
// While en is low the counter is held at 0 and the output is low.
module mpwm_core #(
  parameter int unsigned N = 12,
  localparam int unsigned SFW = $clog2(N)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic [SFW-1:0] sf,        // splitting factor, 0 .. N-1
  input  logic [N-1:0]   duty,      // duty_input
  output logic [N-1:0]   cnt,       // counter C
  output logic [N-1:0]   c_r,       // rearranged counter C_R
  output logic           period_end,
  output logic           mpwm_out
);
  timeunit 1ns; timeprecision 1ps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   cnt <= '0;
    else if (!en) cnt <= '0;
    else          cnt <= cnt + 1'b1;
  end

  // C_R[k] = C[N-1-k] for k < SF, C_R[k] = C[k-SF] otherwise.
  always_comb begin
    for (int unsigned k = 0; k < N; k++) begin
      if (k < 32'(sf)) c_r[k] = cnt[N-1-k];
      else             c_r[k] = cnt[k-32'(sf)];
    end
  end

  assign period_end = en && (cnt == '1);
  assign mpwm_out   = en && (duty > c_r);

endmodule
