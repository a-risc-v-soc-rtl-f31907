// soc_pkg: types and constants shared by the MPWM-DAC SoC.
//
// The on-chip bus is a simple request/response protocol used by every master
// and slave of the bus matrix (the bus itself is this design's choice; the
// SoC description names only a "high speed bus matrix"):
//   * A master drives a bus_req_t with valid=1 and holds all fields stable
//     until the slave answers ready=1 in the same cycle (the accept cycle).
//   * Exactly one cycle after the accept cycle the slave drives rvalid=1,
//     with rdata for a read. Writes also get this acknowledge.
//   * A slave may hold ready low to stall; it never answers late.
// Address map (choice of this design, the on-chip sizes are the paper's):
//   I-SRAM 0x0000_0000 (128 KB), D-SRAM 0x2000_0000 (128 KB),
//   MPWM-DAC registers 0x4000_0000, DMA registers 0x4000_1000,
//   every other address goes to the external memory interface.
package soc_pkg;
  timeunit 1ns; timeprecision 1ps;

  typedef struct packed {
    logic        valid;
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
    logic [3:0]  be;
  } bus_req_t;

  typedef struct packed {
    logic        ready;
    logic        rvalid;
    logic [31:0] rdata;
  } bus_rsp_t;

  // Bus matrix ports.
  localparam int unsigned NUM_MASTERS = 3;
  localparam int unsigned NUM_SLAVES  = 5;

  typedef enum logic [1:0] {
    M_CORE_I = 2'd0,
    M_CORE_D = 2'd1,
    M_DMA    = 2'd2
  } master_e;

  typedef enum logic [2:0] {
    S_ISRAM = 3'd0,
    S_DSRAM = 3'd1,
    S_DAC   = 3'd2,
    S_DMA   = 3'd3,
    S_EXT   = 3'd4
  } slave_e;

  localparam logic [31:0] ISRAM_BASE = 32'h0000_0000;
  localparam logic [31:0] DSRAM_BASE = 32'h2000_0000;
  localparam logic [31:0] DAC_BASE   = 32'h4000_0000;
  localparam logic [31:0] DMA_BASE   = 32'h4000_1000;
  localparam int unsigned SRAM_BYTES = 128 * 1024;

  // Address decoder of the bus matrix.
  function automatic slave_e decode(input logic [31:0] addr);
    if (addr[31:17] == ISRAM_BASE[31:17])      return S_ISRAM;
    else if (addr[31:17] == DSRAM_BASE[31:17]) return S_DSRAM;
    else if (addr[31:12] == DAC_BASE[31:12])   return S_DAC;
    else if (addr[31:12] == DMA_BASE[31:12])   return S_DMA;
    else                                       return S_EXT;
  endfunction

  // MPWM-DAC register offsets (word addresses within its 4 KB window).
  localparam logic [11:0] DAC_CTRL   = 12'h000;  // [0] enable, [7:4] SF, [8] DMA request enable
  localparam logic [11:0] DAC_DUTY   = 12'h004;  // {coarse duty, 4 fine bits}
  localparam logic [11:0] DAC_STATUS = 12'h008;  // [0] DLL locked, [31:16] period count

  // DMA register layout: channel c at 0x10*c, global DONE flags at 0x100.
  localparam logic [3:0]  DMA_SRC  = 4'h0;
  localparam logic [3:0]  DMA_DST  = 4'h4;
  localparam logic [3:0]  DMA_LEN  = 4'h8;
  localparam logic [3:0]  DMA_CTRL = 4'hC;       // [0] enable, [1] src incr, [2] dst incr, [3] paced by request
  localparam logic [11:0] DMA_DONE = 12'h100;    // sticky done flags, write 1 to clear
endpackage
