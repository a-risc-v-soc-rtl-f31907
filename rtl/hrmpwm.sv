// hrmpwm: high-resolution MPWM macro (behavioural model of the full-custom
// block, around synthesizable control logic).
//
// The macro adds FINE = 4 bits of resolution below one clock to the MPWM
// generator without raising the clock rate. It holds:
//   * hrmpwm_ctrl (RTL): the MPWM generator, the output flip-flop (Q, Qb),
//     the duty shadow registers and the per-pulse tap code d_ctrl;
//   * dll (behavioural): locks a 16-cell reference line to one clock
//     period and hands its control voltage vc to the signal path;
//   * a 16-cell vcdl (behavioural) with the same cells and vc, fed by Qb,
//     whose taps P0..P15 lag Qb by 1..16 sixteenths of a clock;
//   * phase_mux (RTL): picks tap P[d_ctrl];
//   * one more matched cell on the Q side and an edge-triggered set/reset
//     stage (behavioural) that makes dac_out.
// A rising edge of Q sets dac_out one cell delay later; a rising edge of
// the selected tap (Qb delayed by d_ctrl+1 cells) clears it. The extra cell
// on the set side cancels the first cell of the line, so a pulse of w
// clocks with code f lasts w + f/16 clocks.
//
// From the paper: a DFF output setting an RS stage and its complement,
// delayed, resetting it (FPGA version); a DLL with PD, CP and 16 phases
// whose vc drives the same delay cells in the MPWM path, and a delay-matched
// 16:1 mux steered by a 4-bit D_CTRL (chip version). This design's own: the
// matched set-side cell, the edge-triggered reading of the RS stage (set
// wins if both edges coincide), which pulse gets the fine part (see
// hrmpwm_ctrl) and all analog numbers. dac_out is meaningful once
// dll_locked is high. The model assumes a clock period the DLL can lock to
// (9.6 ns to 28.8 ns with the default cell and VC_INIT:
// the 14.4 ns starting line delay must lie between half and one and a half
// periods).
module hrmpwm #(
  parameter int unsigned N    = 12,
  parameter int unsigned FINE = 4,
  localparam int unsigned SFW = $clog2(N),
  localparam int unsigned STAGES = 1 << FINE
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic [SFW-1:0]  sf_in,
  input  logic [N-1:0]    duty_in,
  input  logic [FINE-1:0] fine_in,
  output logic            dac_out,     // high-resolution MPWM output
  output logic            coarse_out,  // clock-aligned MPWM (Q)
  output logic            dll_locked,
  output logic            load_pulse,
  output logic [N-1:0]    cnt
);
  timeunit 1ns; timeprecision 1ps;

  real               vc;
  logic              q, qb;
  logic [FINE-1:0]   d_ctrl;
  logic [STAGES-1:0] taps;
  logic              set_d, rst_d;
  logic              set_prev, rst_prev;

  hrmpwm_ctrl #(.N(N), .FINE(FINE)) u_ctrl (
    .clk, .rst_n, .en, .sf_in, .duty_in, .fine_in,
    .q, .qb, .d_ctrl, .cnt, .load_pulse
  );

  dll #(.STAGES(STAGES)) u_dll (.clk, .rst_n, .vc, .locked(dll_locked));

  vcdl #(.STAGES(STAGES)) u_line (.in(qb), .vc, .p(taps));

  phase_mux #(.STAGES(STAGES)) u_mux (.p(taps), .d_ctrl, .out(rst_d));

  delay_cell u_set_cell (.a(q), .vc, .y(set_d));

  assign coarse_out = q;

  // Edge-triggered set/reset output stage.
  initial begin
    dac_out  = 1'b0;
    set_prev = 1'b0;
    rst_prev = 1'b0;
  end

  always @(set_d or rst_d or rst_n) begin
    if (!rst_n) begin
      dac_out = 1'b0;
    end else begin
      if (rst_d && !rst_prev) dac_out = 1'b0;
      if (set_d && !set_prev) dac_out = 1'b1;
    end
    set_prev = set_d;
    rst_prev = rst_d;
  end

endmodule
