// tb_dma: checks the 12-channel DMA against a memory model on its master
// port (random stalls, answer one clock after accept) and a register
// model of a paced peripheral.
//  * channel 3: 40 words, source and destination increment;
//  * channel 7: 25 words gathered from an incrementing source into one
//    fixed destination word (only the last word stays);
//  * channel 0: paced, 16 words into a fixed "peripheral" register; the
//    testbench raises dreq[0] at random times and drops it when the
//    register is written, so each request moves exactly one word;
//  * channel 11: LEN = 0 finishes at once.
// Checked: destination contents, the order of the paced writes, one word
// per request, DONE flags and irq, DONE write-one-to-clear, register read
// back, and that channels 3 and 7 interleave (round robin).
module tb_dma;
  timeunit 1ns; timeprecision 1ps;
  import soc_pkg::*;

  logic      clk = 1'b0, rst_n = 1'b0;
  bus_req_t  s_req, m_req;
  bus_rsp_t  s_rsp, m_rsp;
  logic [11:0] dreq = '0;
  logic      irq, xfer_done;
  int        checks = 0, failures = 0;

  always #5 clk = ~clk;

  dma #(.CHANNELS(12)) dut (.*);

  // memory model
  logic [31:0] mem [int unsigned];
  logic        m_ready = 1'b1, m_ack = 1'b0;
  logic [31:0] m_data;
  localparam logic [31:0] PERIPH = 32'h4000_0004;
  logic [31:0] periph_log [$];
  int          last_ch = -1, switches = 0, n3 = 0, n7 = 0, n_done = 0;
  always @(posedge clk) if (xfer_done) n_done++;
  always @(negedge clk) m_ready = ($urandom_range(2) != 0);
  assign m_rsp = '{ready: m_ready, rvalid: m_ack, rdata: m_data};
  always @(posedge clk) begin
    m_ack <= m_req.valid && m_ready;
    if (m_req.valid && m_ready) begin
      if (m_req.we) begin
        mem[m_req.addr] = m_req.wdata;
        if (m_req.addr == PERIPH) begin
          periph_log.push_back(m_req.wdata);
          dreq[0] <= 1'b0;
        end
      end else m_data <= mem.exists(m_req.addr) ? mem[m_req.addr] : 32'hDEAD_0000 ^ m_req.addr;
    end
    // which channel wrote: told apart by destination address
    if (m_req.valid && m_ready && m_req.we) begin
      automatic int ch = (m_req.addr == PERIPH) ? 0 : (m_req.addr[15:12] == 4'h8) ? 3 : 7;
      if (ch == 3) n3++;
      if (ch == 7) n7++;
      if (last_ch != -1 && ch != last_ch) switches++;
      last_ch = ch;
    end
  end

  task automatic reg_wr(logic [11:0] off, logic [31:0] d);
    @(negedge clk);
    s_req = '{valid: 1'b1, we: 1'b1, addr: DMA_BASE + 32'(off), wdata: d, be: 4'hF};
    @(negedge clk);
    s_req = '0;
  endtask

  task automatic reg_rd(logic [11:0] off, output logic [31:0] d);
    @(negedge clk);
    s_req = '{valid: 1'b1, we: 1'b0, addr: DMA_BASE + 32'(off), wdata: 0, be: 4'hF};
    @(negedge clk);
    s_req = '0;
    d = s_rsp.rdata;
    checks++;
    if (!s_rsp.rvalid) begin failures++; $display("FAIL register read not answered"); end
  endtask

  task automatic expect_eq(logic [31:0] got, logic [31:0] want, string what);
    checks++;
    if (got !== want) begin failures++; $display("FAIL %s: %h expected %h", what, got, want); end
  endtask

  initial begin
    logic [31:0] d;
    s_req = '0;
    for (int i = 0; i < 64; i++) begin
      mem[32'h2000_0000 + 32'(4 * i)] = 32'h1000_0000 + 32'(i);
      mem[32'h2000_1000 + 32'(4 * i)] = 32'h7000_0000 + 32'(i);
      mem[32'h2000_2000 + 32'(4 * i)] = 32'h0000_0100 + 32'(i);
    end
    #12 rst_n = 1'b1;
    // channel 3: block copy
    reg_wr(12'h030, 32'h2000_0000);
    reg_wr(12'h034, 32'h0000_8000);
    reg_wr(12'h038, 32'd40);
    // channel 7: gather into one word
    reg_wr(12'h070, 32'h2000_1000);
    reg_wr(12'h074, 32'h0000_9000);
    reg_wr(12'h078, 32'd25);
    // channel 0: paced
    reg_wr(12'h000, 32'h2000_2000);
    reg_wr(12'h004, PERIPH);
    reg_wr(12'h008, 32'd16);
    reg_rd(12'h034, d); expect_eq(d, 32'h0000_8000, "DST readback");
    reg_rd(12'h078, d); expect_eq(d, 32'd25, "LEN readback");
    // start 3 and 7 together, then 0 and 11
    reg_wr(12'h03C, 32'h7);   // enable, src inc, dst inc
    reg_wr(12'h07C, 32'h3);   // enable, src inc
    reg_wr(12'h00C, 32'hB);   // enable, src inc, paced
    reg_wr(12'h0BC, 32'h1);   // channel 11, LEN 0
    fork
      begin
        for (int i = 0; i < 16; i++) begin
          repeat ($urandom_range(5, 30)) @(posedge clk);
          #1 dreq[0] = 1'b1;
          wait (dreq[0] == 1'b0);
          // exactly one word moved for this request
          repeat (3) @(posedge clk);
          expect_eq(32'(periph_log.size()), 32'(i + 1), "paced words");
        end
      end
      begin
        wait (n3 == 40 && n7 == 25);
      end
    join
    repeat (20) @(posedge clk);
    for (int i = 0; i < 40; i++)
      expect_eq(mem[32'h0000_8000 + 32'(4 * i)], 32'h1000_0000 + 32'(i), "block copy");
    expect_eq(mem[32'h0000_9000], 32'h7000_0018, "gather last word");
    for (int i = 0; i < 16; i++)
      expect_eq(periph_log[i], 32'h0000_0100 + 32'(i), "paced order");
    reg_rd(12'h100, d);
    expect_eq(d, 32'h0000_0889, "DONE flags");    // channels 0, 3, 7, 11
    expect_eq(32'(irq), 32'd1, "irq");
    reg_rd(12'h03C, d); expect_eq(d, 32'h6, "channel 3 enable cleared");
    reg_rd(12'h038, d); expect_eq(d, 32'd0, "channel 3 LEN at 0");
    reg_wr(12'h100, 32'h0000_0089);
    reg_rd(12'h100, d); expect_eq(d, 32'h0000_0800, "DONE after clear");
    reg_wr(12'h100, 32'h0000_0800);
    @(negedge clk);
    expect_eq(32'(irq), 32'd0, "irq cleared");
    expect_eq(32'(n_done), 32'd81, "xfer_done pulses");
    checks++;
    if (switches < 20) begin failures++; $display("FAIL channels did not interleave (%0d switches)", switches); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
