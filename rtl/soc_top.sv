// soc_top: RISC-V IoT SoC around the MPWM-DAC.
//
// The built part of the SoC: a bus matrix joining three masters (the core's
// instruction and data ports and the 12-channel DMA) to the 128 KB
// instruction SRAM, the 128 KB data SRAM, the MPWM-DAC registers, the DMA
// registers and the external memory interface. The RV32 core itself, the
// external memory controller and the other peripherals are not part of
// this RTL: their bus ports and request lines are ports of this module.
// The MPWM-DAC's DMA request drives DMA channel 0; the other channels'
// request lines come from outside.
// The block list, the SRAM sizes, the 12 DMA channels and the bus link
// between core and DAC follow the paper's SoC description; the bus
// protocol, the address map (soc_pkg) and the request wiring are this
// design's.
module soc_top
  import soc_pkg::*;
#(
  parameter int unsigned DAC_N        = 12,
  parameter int unsigned DAC_FINE     = 4,
  parameter int unsigned SRAM_SIZE    = SRAM_BYTES,
  parameter int unsigned DMA_CHANNELS = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // RV32 core bus ports
  input  bus_req_t                core_i_req,
  output bus_rsp_t                core_i_rsp,
  input  bus_req_t                core_d_req,
  output bus_rsp_t                core_d_rsp,
  // external memory interface (bus side)
  output bus_req_t                ext_req,
  input  bus_rsp_t                ext_rsp,
  // DMA requests of the other peripherals (channels 1 .. DMA_CHANNELS-1)
  input  logic [DMA_CHANNELS-1:1] periph_dreq,
  output logic                    dma_irq,
  // MPWM-DAC
  output logic                    dac_out,
  output logic                    dac_coarse_out,
  output logic                    dac_dll_locked
);
  timeunit 1ns; timeprecision 1ps;

  bus_req_t m_req [NUM_MASTERS];
  bus_rsp_t m_rsp [NUM_MASTERS];
  bus_req_t s_req [NUM_SLAVES];
  bus_rsp_t s_rsp [NUM_SLAVES];
  logic     bus_conflict;
  logic     dac_dreq, dac_period_tick, dma_xfer_done;

  assign m_req[M_CORE_I] = core_i_req;
  assign m_req[M_CORE_D] = core_d_req;
  assign core_i_rsp      = m_rsp[M_CORE_I];
  assign core_d_rsp      = m_rsp[M_CORE_D];
  assign ext_req         = s_req[S_EXT];
  assign s_rsp[S_EXT]    = ext_rsp;

  bus_matrix u_matrix (
    .clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp, .conflict(bus_conflict)
  );

  sram #(.BYTES(SRAM_SIZE)) u_isram (.clk, .rst_n, .req(s_req[S_ISRAM]), .rsp(s_rsp[S_ISRAM]));
  sram #(.BYTES(SRAM_SIZE)) u_dsram (.clk, .rst_n, .req(s_req[S_DSRAM]), .rsp(s_rsp[S_DSRAM]));

  dma #(.CHANNELS(DMA_CHANNELS)) u_dma (
    .clk, .rst_n,
    .s_req(s_req[S_DMA]), .s_rsp(s_rsp[S_DMA]),
    .m_req(m_req[M_DMA]), .m_rsp(m_rsp[M_DMA]),
    .dreq({periph_dreq, dac_dreq}), .irq(dma_irq), .xfer_done(dma_xfer_done)
  );

  mpwm_dac #(.N(DAC_N), .FINE(DAC_FINE)) u_dac (
    .clk, .rst_n,
    .s_req(s_req[S_DAC]), .s_rsp(s_rsp[S_DAC]),
    .dac_out, .coarse_out(dac_coarse_out), .dll_locked(dac_dll_locked),
    .dreq(dac_dreq), .period_tick(dac_period_tick)
  );

endmodule
