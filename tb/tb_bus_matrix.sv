// tb_bus_matrix: three masters issue random reads and writes to all five
// slaves at once. Each slave model is a small memory that stalls at random
// (ready low) and answers one clock after each accept; an unwritten word
// reads as {slave number, address bits}, so a request routed to the wrong
// slave returns wrong data. Each master works in its own part of every
// slave, so its reads are predicted from its own writes. Checked: read
// data, one response per accepted request, that contention occurs, that no
// master waits longer than 30 clocks, and the round-robin bound: while a
// master waits, at most NM-1 accesses of other masters are accepted at its
// slave (and that bound is actually reached).
module tb_bus_matrix;
  timeunit 1ns; timeprecision 1ps;
  import soc_pkg::*;

  localparam int NM = NUM_MASTERS;
  localparam int NS = NUM_SLAVES;

  logic     clk = 1'b0, rst_n = 1'b0;
  bus_req_t m_req [NM];
  bus_rsp_t m_rsp [NM];
  bus_req_t s_req [NS];
  bus_rsp_t s_rsp [NS];
  logic     conflict;
  int       checks = 0, failures = 0, conflicts = 0, max_wait = 0;
  logic [NM-1:0] m_done = '0;

  always #5 clk = ~clk;

  bus_matrix dut (.*);

  // slave models
  logic [31:0] smem [NS][int unsigned];
  logic [NS-1:0] s_ready;
  logic [NS-1:0] s_ack;
  logic [31:0]   s_data [NS];
  always @(negedge clk) for (int s = 0; s < NS; s++) s_ready[s] = ($urandom_range(3) != 0);
  always_comb for (int s = 0; s < NS; s++) s_rsp[s] = '{ready: s_ready[s], rvalid: s_ack[s], rdata: s_data[s]};
  always @(posedge clk) begin
    for (int s = 0; s < NS; s++) begin
      s_ack[s] <= rst_n && s_req[s].valid && s_ready[s];
      if (s_req[s].valid && s_ready[s]) begin
        if (s_req[s].we) smem[s][s_req[s].addr] = s_req[s].wdata;
        else s_data[s] <= smem[s].exists(s_req[s].addr) ? smem[s][s_req[s].addr]
                                                        : {4'(s), s_req[s].addr[27:0]};
      end
    end
    if (conflict) conflicts++;
  end

  // Round-robin bound: while master m waits for a slave, at most NM-1
  // accesses by other masters may be accepted at that slave.
  int others [NM];
  int max_others = 0;
  always @(posedge clk) begin
    for (int m = 0; m < NM; m++) begin
      if (!rst_n || !m_req[m].valid || m_rsp[m].ready) others[m] = 0;
      else begin
        for (int k = 0; k < NM; k++)
          if (k != m && m_req[k].valid && m_rsp[k].ready
              && decode(m_req[k].addr) == decode(m_req[m].addr)) others[m]++;
        if (others[m] > max_others) max_others = others[m];
        if (others[m] > NM - 1) begin
          checks++; failures++;
          $display("FAIL master %0d passed over %0d times", m, others[m]);
        end
      end
    end
  end

  function automatic logic [31:0] base_of(int s);
    case (s)
      0: return ISRAM_BASE;
      1: return DSRAM_BASE;
      2: return DAC_BASE;
      3: return DMA_BASE;
      default: return 32'h8000_0000;
    endcase
  endfunction

  for (genvar m = 0; m < NM; m++) begin : g_master
    logic [31:0] own [int unsigned];
    initial begin
      m_req[m] = '0;
      @(posedge rst_n);
      repeat (2) @(posedge clk);
      for (int i = 0; i < 1500; i++) begin
        automatic int s = $urandom_range(NS - 1);
        automatic logic [31:0] a = base_of(s) + 32'(m << 8) + 32'($urandom_range(15) << 2);
        automatic logic we = $urandom_range(1);
        automatic logic [31:0] wd = $urandom;
        automatic int waited = 0;
        automatic logic [31:0] expect_d;
        #1;
        m_req[m] = '{valid: 1'b1, we: we, addr: a, wdata: wd, be: 4'hF};
        forever begin
          @(posedge clk);
          if (m_rsp[m].ready) break;
          waited++;
        end
        if (waited > max_wait) max_wait = waited;
        #1;
        m_req[m].valid = 1'b0;
        checks++;
        if (!m_rsp[m].rvalid) begin failures++; $display("FAIL master %0d: no response", m); end
        if (we) own[a] = wd;
        else begin
          expect_d = own.exists(a) ? own[a] : {4'(s), a[27:0]};
          checks++;
          if (m_rsp[m].rdata !== expect_d) begin
            failures++;
            $display("FAIL master %0d read %h: %h expected %h", m, a, m_rsp[m].rdata, expect_d);
          end
        end
        // no response may arrive for a master that was not accepted
        @(posedge clk);
        #1;
        checks++;
        if (m_rsp[m].rvalid) begin failures++; $display("FAIL master %0d: extra response", m); end
      end
      m_done[m] = 1'b1;
    end
  end

  initial begin
    #12 rst_n = 1'b1;
    wait (&m_done);
    checks += 2;
    if (conflicts < 50) begin failures++; $display("FAIL only %0d conflicts", conflicts); end
    if (max_wait > 30) begin failures++; $display("FAIL a master waited %0d clocks", max_wait); end
    checks++;
    if (max_others != NM - 1) begin
      failures++; $display("FAIL round-robin bound reached %0d, expected %0d", max_others, NM - 1);
    end
    $display("conflicts=%0d max_wait=%0d max_passed_over=%0d", conflicts, max_wait, max_others);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
