// mpwm_dac: the SoC's MPWM-DAC peripheral.
//
// The RISC-V core (or the DMA) configures the DAC over the on-chip bus; the
// DAC's bit stream leaves the chip at dac_out and becomes a voltage in an
// external low-pass filter. The register block holds:
//   CTRL   [0] enable, [7:4] splitting factor SF (values above N-1 are
//          taken as N-1), [8] DMA request enable
//   DUTY   [N+FINE-1:0] duty = coarse clocks (upper N bits) and
//          sixteenths of a clock (lower FINE bits)
//   STATUS [0] DLL locked, [1] DMA request pending, [31:16] periods so far
// and feeds the hrmpwm macro, which copies SF and DUTY at the end of each
// MPWM period of 2^N clocks. With DMA requests enabled, dreq rises at each
// period end and falls when DUTY is written, so a paced DMA channel can
// stream one sample per period into DUTY.
// Bus timing (soc_pkg): always ready, response one clock after an access.
// The paper states that the core configures the MPWM-DAC over the high-
// speed bus; the register map, the request line and the clamping of SF are
// this design's choices.
module mpwm_dac
  import soc_pkg::*;
#(
  parameter int unsigned N    = 12,
  parameter int unsigned FINE = 4,
  localparam int unsigned SFW = $clog2(N)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t s_req,
  output bus_rsp_t s_rsp,
  output logic     dac_out,
  output logic     coarse_out,
  output logic     dll_locked,
  output logic     dreq,
  output logic     period_tick   // one clock at each period end while enabled
);
  timeunit 1ns; timeprecision 1ps;

  logic              en_q, dma_en_q;
  logic [SFW-1:0]    sf_q;
  logic [N+FINE-1:0] duty_q;
  logic [15:0]       periods_q;
  logic              load_pulse;
  logic [N-1:0]      cnt;
  logic              s_ack;
  logic [31:0]       s_rdata;
  logic              wr_ctrl, wr_duty;

  hrmpwm #(.N(N), .FINE(FINE)) u_hrmpwm (
    .clk, .rst_n, .en(en_q), .sf_in(sf_q),
    .duty_in(duty_q[N+FINE-1:FINE]), .fine_in(duty_q[FINE-1:0]),
    .dac_out, .coarse_out, .dll_locked, .load_pulse, .cnt
  );

  assign period_tick = en_q && load_pulse;
  assign wr_ctrl = s_req.valid && s_req.we && (s_req.addr[11:0] == DAC_CTRL);
  assign wr_duty = s_req.valid && s_req.we && (s_req.addr[11:0] == DAC_DUTY);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_q      <= 1'b0;
      dma_en_q  <= 1'b0;
      sf_q      <= '0;
      duty_q    <= '0;
      periods_q <= '0;
      dreq      <= 1'b0;
    end else begin
      if (wr_ctrl) begin
        en_q     <= s_req.wdata[0];
        dma_en_q <= s_req.wdata[8];
        sf_q     <= (int'(s_req.wdata[7:4]) > N - 1) ? SFW'(N - 1) : SFW'(s_req.wdata[7:4]);
      end
      if (wr_duty) duty_q <= s_req.wdata[N+FINE-1:0];
      if (period_tick) periods_q <= periods_q + 16'd1;
      if (wr_duty || !dma_en_q) dreq <= 1'b0;
      else if (period_tick)     dreq <= 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_ack   <= 1'b0;
      s_rdata <= '0;
    end else begin
      s_ack <= s_req.valid;
      if (s_req.valid && !s_req.we) begin
        case (s_req.addr[11:0])
          DAC_CTRL:   s_rdata <= {23'd0, dma_en_q, 4'(sf_q), 3'd0, en_q};
          DAC_DUTY:   s_rdata <= 32'(duty_q);
          DAC_STATUS: s_rdata <= {periods_q, 14'd0, dreq, dll_locked};
          default:    s_rdata <= '0;
        endcase
      end
    end
  end

  assign s_rsp.ready  = 1'b1;
  assign s_rsp.rvalid = s_ack;
  assign s_rsp.rdata  = s_rdata;

endmodule
