// sram: on-chip single-port SRAM with a bus slave port.
//
// The SoC has a 128 KB instruction SRAM and a 128 KB data SRAM; both are
// instances of this module (BYTES = 131072, 32768 words of 32 bits). The
// array stands for the SRAM macro of the chip. Port timing follows the
// on-chip bus of soc_pkg: the SRAM is always ready, accepts one access per
// clock, and answers every access one clock later (rvalid, and rdata for a
// read). Writes honour the four byte enables. Addresses wrap inside the
// array (the bus matrix only sends addresses of this SRAM's window). The
// contents are not reset, as in a real SRAM.
module sram
  import soc_pkg::*;
#(
  parameter int unsigned BYTES = 128 * 1024,
  localparam int unsigned WORDS = BYTES / 4,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t req,
  output bus_rsp_t rsp
);
  timeunit 1ns; timeprecision 1ps;

  logic [31:0]   mem [WORDS];
  logic [AW-1:0] idx;
  logic          ack_q;
  logic [31:0]   rdata_q;

  assign idx = req.addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (req.valid && req.we) begin
      for (int b = 0; b < 4; b++)
        if (req.be[b]) mem[idx][8*b +: 8] <= req.wdata[8*b +: 8];
    end
    if (req.valid && !req.we) rdata_q <= mem[idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ack_q <= 1'b0;
    else        ack_q <= req.valid;
  end

  assign rsp.ready  = 1'b1;
  assign rsp.rvalid = ack_q;
  assign rsp.rdata  = rdata_q;

endmodule
