// hrmpwm_ctrl: synchronous part of the high-resolution MPWM (HR-MPWM).
//
// The duty word has N coarse bits (whole clock cycles, produced by an
// mpwm_core) and FINE extra bits (sixteenths of a clock for FINE = 4). The
// coarse MPWM output is registered in the output flip-flop (Q, and its
// complement Qb) that drives the analog edge stage: Q sets the output, and
// Qb, delayed through the DLL-calibrated delay line and the phase
// multiplexer, resets it. d_ctrl selects the delay tap, so it decides how
// far the falling edge of the current pulse is pushed out.
//
// This design gives the fine extension to one pulse per period: the pulse
// that ends in the last sub-region (sub-region address all ones), which is
// never full and so always has a falling edge when the coarse duty is at
// least SN. Every other pulse gets d_ctrl = 0. The mean output is then
// (coarse + fine/2^FINE) clocks per period. If the coarse duty is below SN
// the last sub-region has no pulse and the fine bits have no effect.
//
// d_ctrl may only change while all taps of the line are equal, or the mux
// would make a false edge. It is updated (a) on the clock edge that starts
// a pulse (the taps are all high then, or the one still rising reaches the
// reset before the new set) and (b) while Q has already been high for two
// clocks (taps all low). The latter catches a pulse that started in a full
// sub-region and runs on into the last one.
//
// duty, fine and sf are copied into shadow registers at the end of each
// period (and while disabled), so a period is never made of two settings;
// load_pulse marks the clock in which the copy happens.
//
// The FPGA version of the paper (a DFF feeding SET directly and RESET
// through an IODELAY) and the 16-phase DLL line of the chip version are
// followed; the per-pulse tap choice and the shadowing are this design's.
module hrmpwm_ctrl #(
  parameter int unsigned N    = 12,
  parameter int unsigned FINE = 4,
  localparam int unsigned SFW = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic [SFW-1:0]  sf_in,
  input  logic [N-1:0]    duty_in,    // coarse duty, clocks per period
  input  logic [FINE-1:0] fine_in,    // fine duty, 1/2^FINE clock
  output logic            q,          // registered MPWM pulse (SET side)
  output logic            qb,         // its complement (RESET side, to the delay line)
  output logic [FINE-1:0] d_ctrl,     // delay tap for the falling edge
  output logic [N-1:0]    cnt,
  output logic            load_pulse  // shadow registers loaded this clock
);
  timeunit 1ns; timeprecision 1ps;

  logic [SFW-1:0]  sf_q;
  logic [N-1:0]    duty_q;
  logic [FINE-1:0] fine_q;
  logic [N-1:0]    c_r;
  logic            period_end, mpwm_out;
  logic            q_d1;
  logic            last_region;

  mpwm_core #(.N(N)) u_core (
    .clk, .rst_n, .en, .sf(sf_q), .duty(duty_q),
    .cnt, .c_r, .period_end, .mpwm_out
  );

  assign load_pulse = period_end || !en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sf_q   <= '0;
      duty_q <= '0;
      fine_q <= '0;
    end else if (load_pulse) begin
      sf_q   <= sf_in;
      duty_q <= duty_in;
      fine_q <= fine_in;
    end
  end

  // Sub-region address = top SF counter bits; last region = all ones.
  always_comb begin
    last_region = 1'b1;
    for (int unsigned k = 0; k < N; k++)
      if (k >= N - 32'(sf_q) && !cnt[k]) last_region = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q      <= 1'b0;
      q_d1   <= 1'b0;
      d_ctrl <= '0;
    end else begin
      q    <= mpwm_out;
      q_d1 <= q;
      if (mpwm_out && (!q || q_d1))
        d_ctrl <= last_region ? fine_q : '0;
    end
  end

  assign qb = ~q;

  // d_ctrl never changes while the line is settling after a falling edge.
  a_dctrl_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (q && !q_d1) |=> $stable(d_ctrl));

endmodule
