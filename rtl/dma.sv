// dma: CHANNELS-channel DMA controller (12 channels in the SoC).
//
// Each channel copies LEN 32-bit words from SRC to DST; either address can
// stay fixed or step by 4, so the same engine moves memory blocks and feeds
// or drains a peripheral register. A channel marked "paced" moves one word
// only while its request line dreq[c] is high (the MPWM-DAC raises its
// line once per MPWM period, and drops it when its duty register is
// written). One engine serves all channels, one word at a time, picking
// among the ready channels in round-robin order. Each word is a bus read
// followed by a bus write on the master port; a channel whose LEN reaches
// zero clears its enable and sets its DONE flag, and irq is high while any
// DONE flag is set.
//
// Registers (slave port, see soc_pkg): channel c at offset 0x10*c: SRC,
// DST, LEN, CTRL ([0] enable, [1] SRC increments, [2] DST increments,
// [3] paced by dreq[c]); DONE at 0x100, write ones to clear. The slave
// port is always ready and answers one clock after each access.
// The SoC description gives only "DMA, 12 channels" and that the DMAs do
// the bulk data transport; everything else here is this design's choice.
module dma
  import soc_pkg::*;
#(
  parameter int unsigned CHANNELS = 12,
  localparam int unsigned CW = $clog2(CHANNELS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  bus_req_t            s_req,   // register port
  output bus_rsp_t            s_rsp,
  output bus_req_t            m_req,   // transfer port
  input  bus_rsp_t            m_rsp,
  input  logic [CHANNELS-1:0] dreq,
  output logic                irq,
  output logic                xfer_done  // one word written this clock
);
  timeunit 1ns; timeprecision 1ps;

  typedef struct packed {
    logic paced;
    logic dst_inc;
    logic src_inc;
    logic en;
  } ch_ctrl_t;

  typedef enum logic [2:0] {IDLE, RD, RD_WAIT, WR, WR_WAIT} state_e;

  logic [31:0]   src  [CHANNELS];
  logic [31:0]   dst  [CHANNELS];
  logic [31:0]   len  [CHANNELS];
  ch_ctrl_t      ctrl [CHANNELS];
  logic [CHANNELS-1:0] done;

  state_e        state;
  logic [CW-1:0] cur, last;
  logic [31:0]   data_q;
  logic [CHANNELS-1:0] ch_ready;
  logic          pick_valid;
  logic [CW-1:0] pick;

  // register port decode
  logic          s_hit_ch, s_hit_done;
  logic [CW-1:0] s_ch;
  logic [3:0]    s_reg;
  logic          s_ack;
  logic [31:0]   s_rdata;

  always_comb begin
    for (int c = 0; c < CHANNELS; c++)
      ch_ready[c] = ctrl[c].en && (len[c] != 0) && (!ctrl[c].paced || dreq[c]);
    pick_valid = 1'b0;
    pick = '0;
    for (int k = 1; k <= CHANNELS; k++) begin
      automatic int unsigned c = (int'(last) + k) % CHANNELS;
      if (!pick_valid && ch_ready[c]) begin
        pick_valid = 1'b1;
        pick = CW'(c);
      end
    end
  end

  always_comb begin
    m_req = '0;
    case (state)
      RD: begin
        m_req.valid = 1'b1;
        m_req.addr  = src[cur];
        m_req.be    = 4'hF;
      end
      WR: begin
        m_req.valid = 1'b1;
        m_req.we    = 1'b1;
        m_req.addr  = dst[cur];
        m_req.wdata = data_q;
        m_req.be    = 4'hF;
      end
      default: ;
    endcase
  end

  assign s_ch       = CW'(s_req.addr[11:4]);
  assign s_reg      = s_req.addr[3:0];
  assign s_hit_ch   = (s_req.addr[11:8] == 4'h0) && (int'(s_req.addr[7:4]) < CHANNELS);
  assign s_hit_done = (s_req.addr[11:0] == DMA_DONE);
  assign xfer_done  = (state == WR_WAIT) && m_rsp.rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      cur   <= '0;
      last  <= CW'(CHANNELS - 1);
      data_q <= '0;
      done  <= '0;
      for (int c = 0; c < CHANNELS; c++) begin
        src[c] <= '0; dst[c] <= '0; len[c] <= '0; ctrl[c] <= '0;
      end
    end else begin
      // transfer engine
      case (state)
        IDLE: begin
          for (int c = 0; c < CHANNELS; c++)
            if (ctrl[c].en && len[c] == 0) begin
              ctrl[c].en <= 1'b0;
              done[c]    <= 1'b1;
            end
          if (pick_valid) begin
            cur   <= pick;
            last  <= pick;
            state <= RD;
          end
        end
        RD:      if (m_rsp.ready) state <= RD_WAIT;
        RD_WAIT: if (m_rsp.rvalid) begin
                   data_q <= m_rsp.rdata;
                   state  <= WR;
                 end
        WR:      if (m_rsp.ready) state <= WR_WAIT;
        WR_WAIT: if (m_rsp.rvalid) begin
                   if (ctrl[cur].src_inc) src[cur] <= src[cur] + 32'd4;
                   if (ctrl[cur].dst_inc) dst[cur] <= dst[cur] + 32'd4;
                   len[cur] <= len[cur] - 32'd1;
                   if (len[cur] == 32'd1) begin
                     ctrl[cur].en <= 1'b0;
                     done[cur]    <= 1'b1;
                   end
                   state <= IDLE;
                 end
        default: state <= IDLE;
      endcase
      // software writes win over the engine's updates in the same clock
      if (s_req.valid && s_req.we) begin
        if (s_hit_ch) begin
          case (s_reg)
            DMA_SRC:  src[s_ch]  <= s_req.wdata;
            DMA_DST:  dst[s_ch]  <= s_req.wdata;
            DMA_LEN:  len[s_ch]  <= s_req.wdata;
            DMA_CTRL: ctrl[s_ch] <= s_req.wdata[3:0];
            default: ;
          endcase
        end
        if (s_hit_done) done <= done & ~s_req.wdata[CHANNELS-1:0];
      end
    end
  end

  // register read port
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_ack   <= 1'b0;
      s_rdata <= '0;
    end else begin
      s_ack <= s_req.valid;
      if (s_req.valid && !s_req.we) begin
        s_rdata <= '0;
        if (s_hit_ch) begin
          case (s_reg)
            DMA_SRC:  s_rdata <= src[s_ch];
            DMA_DST:  s_rdata <= dst[s_ch];
            DMA_LEN:  s_rdata <= len[s_ch];
            DMA_CTRL: s_rdata <= {28'd0, ctrl[s_ch]};
            default: ;
          endcase
        end
        if (s_hit_done) s_rdata <= 32'(done);
      end
    end
  end

  assign s_rsp.ready  = 1'b1;
  assign s_rsp.rvalid = s_ack;
  assign s_rsp.rdata  = s_rdata;
  assign irq          = |done;

endmodule
