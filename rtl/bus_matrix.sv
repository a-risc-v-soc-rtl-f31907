// bus_matrix: crossbar of the SoC's high-speed bus.
//
// NUM_MASTERS masters (core instruction port, core data port, DMA) reach
// NUM_SLAVES slaves (I-SRAM, D-SRAM, MPWM-DAC registers, DMA registers,
// external memory interface) over the request/response bus of soc_pkg.
// Each request is routed by soc_pkg::decode. Every slave has its own
// round-robin arbiter, so masters that target different slaves proceed in
// the same clock; masters that target the same slave take turns, the last
// winner getting lowest priority. The arbiter is combinational: a request
// is granted, and accepted when the slave's ready is high, in the cycle it
// is presented. Since every slave answers exactly one clock after the
// accept, the response path only remembers, per master, which slave
// accepted it in the previous clock. The SoC description only names a
// "high speed bus matrix"; the crossbar structure, the arbitration and the
// bus protocol are this design's choices.
module bus_matrix
  import soc_pkg::*;
#(
  parameter int unsigned NM = NUM_MASTERS,
  parameter int unsigned NS = NUM_SLAVES
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t m_req [NM],
  output bus_rsp_t m_rsp [NM],
  output bus_req_t s_req [NS],
  input  bus_rsp_t s_rsp [NS],
  output logic     conflict   // two or more masters wanted one slave this clock
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned SW = (NS > 1) ? $clog2(NS) : 1;

  logic [NS-1:0] want   [NM];   // want[m][s]: master m requests slave s
  logic [NM-1:0] grant  [NS];   // grant[s][m]
  logic [MW-1:0] last_q [NS];   // last winner per slave
  logic [SW-1:0] sel_q  [NM];   // slave that accepted master m last clock
  logic [NM-1:0] acc_q;         // master m was accepted last clock
  logic [NM-1:0] acc;

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      want[m] = '0;
      if (m_req[m].valid) want[m][decode(m_req[m].addr)] = 1'b1;
    end
  end

  // Round-robin arbitration per slave, starting after the last winner.
  always_comb begin
    conflict = 1'b0;
    for (int s = 0; s < NS; s++) begin
      automatic int unsigned n_req = 0;
      grant[s] = '0;
      for (int k = 1; k <= NM; k++) begin
        automatic int unsigned m = (int'(last_q[s]) + k) % NM;
        if (want[m][s]) begin
          n_req++;
          if (grant[s] == '0) grant[s][m] = 1'b1;
        end
      end
      if (n_req > 1) conflict = 1'b1;
    end
  end

  always_comb begin
    for (int s = 0; s < NS; s++) begin
      s_req[s] = '0;
      for (int m = 0; m < NM; m++)
        if (grant[s][m]) s_req[s] = m_req[m];
    end
    for (int m = 0; m < NM; m++) begin
      acc[m] = 1'b0;
      for (int s = 0; s < NS; s++)
        if (grant[s][m] && s_rsp[s].ready) acc[m] = 1'b1;
      m_rsp[m].ready  = acc[m];
      m_rsp[m].rvalid = acc_q[m] && s_rsp[sel_q[m]].rvalid;
      m_rsp[m].rdata  = s_rsp[sel_q[m]].rdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0;
      for (int m = 0; m < NM; m++) sel_q[m] <= '0;
      for (int s = 0; s < NS; s++) last_q[s] <= MW'(NM - 1);
    end else begin
      acc_q <= acc;
      for (int m = 0; m < NM; m++)
        if (m_req[m].valid) sel_q[m] <= SW'(decode(m_req[m].addr));
      for (int s = 0; s < NS; s++)
        for (int m = 0; m < NM; m++)
          if (grant[s][m] && s_rsp[s].ready) last_q[s] <= MW'(m);
    end
  end

  // Bus rules: a master holds its request until it is accepted, and a
  // slave answers every accepted request exactly one clock later.
  for (genvar m = 0; m < NM; m++) begin : g_assert
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      (m_req[m].valid && !m_rsp[m].ready) |=> (m_req[m].valid && $stable(m_req[m].addr)
                                               && $stable(m_req[m].we)));
    a_answer: assert property (@(posedge clk) disable iff (!rst_n)
      m_rsp[m].ready |=> m_rsp[m].rvalid);
  end

endmodule
