// mpwm_core_checker: drives one mpwm_core of width N through whole MPWM
// periods and checks every clock against a reference built the other way
// round: the period is cut into SN = 2^SF sub-regions of L = 2^(N-SF)
// clocks; the sub-region with address a (top SF counter bits) has rank
// bitreverse(a); its pulse is duty/SN clocks long, one more if its rank is
// below duty mod SN. Per period it also checks the number of high clocks
// (= duty) and the number of rising edges of the periodic waveform against
// the edge-count formula E = D for D <= SN, SN up to 2^N-SN, 2^N-D above.
// EXHAUSTIVE runs every (SF, duty) pair; otherwise RANDOM_PERIODS random
// pairs. Used by tb_mpwm_core.
module mpwm_core_checker #(
  parameter int unsigned N = 5,
  parameter bit          EXHAUSTIVE = 1'b1,
  parameter int unsigned RANDOM_PERIODS = 0
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned SFW = $clog2(N);
  localparam int unsigned P = 1 << N;

  logic           en;
  logic [SFW-1:0] sf;
  logic [N-1:0]   duty, cnt, c_r;
  logic           period_end, mpwm_out;
  logic           wave [P];

  mpwm_core #(.N(N)) dut (.*);

  function automatic bit ref_out(int unsigned sfv, int unsigned d, int unsigned t);
    int unsigned sn = 1 << sfv;
    int unsigned l = P >> sfv;
    int unsigned a = t / l;       // sub-region address
    int unsigned pos = t % l;
    int unsigned rank = 0;
    int unsigned width;
    for (int unsigned b = 0; b < sfv; b++) if (a[b]) rank |= 1 << (sfv - 1 - b);
    width = d / sn + ((rank < d % sn) ? 1 : 0);
    return pos < width;
  endfunction

  function automatic int unsigned edges_formula(int unsigned sfv, int unsigned d);
    int unsigned sn = 1 << sfv;
    if (d <= sn) return d;
    else if (d <= P - sn) return sn;
    else return P - d;
  endfunction

  task automatic run_period(int unsigned sfv, int unsigned d);
    int unsigned ones = 0, rises = 0;
    sf = SFW'(sfv);
    duty = N'(d);
    for (int unsigned t = 0; t < P; t++) begin
      @(negedge clk);
      checks++;
      if (cnt != N'(t)) begin
        failures++;
        $display("FAIL N=%0d counter %0d expected %0d", N, cnt, t);
      end
      checks++;
      if (mpwm_out != ref_out(sfv, d, t)) begin
        failures++;
        $display("FAIL N=%0d SF=%0d duty=%0d t=%0d out=%0b", N, sfv, d, t, mpwm_out);
      end
      checks++;
      if (period_end != (t == P - 1)) begin
        failures++;
        $display("FAIL N=%0d period_end at t=%0d", N, t);
      end
      wave[t] = mpwm_out;
    end
    for (int unsigned t = 0; t < P; t++) begin
      if (wave[t]) ones++;
      if (wave[t] && !wave[(t + P - 1) % P]) rises++;
    end
    checks += 2;
    if (ones != d) begin
      failures++;
      $display("FAIL N=%0d SF=%0d duty=%0d: %0d high clocks", N, sfv, d, ones);
    end
    if (rises != edges_formula(sfv, d)) begin
      failures++;
      $display("FAIL N=%0d SF=%0d duty=%0d: %0d rising edges, formula %0d", N, sfv, d, rises,
               edges_formula(sfv, d));
    end
  endtask

  initial begin
    checks = 0; failures = 0; done = 1'b0;
    en = 1'b0; sf = '0; duty = '0;
    @(posedge rst_n);
    @(negedge clk);
    en = 1'b1;   // counter leaves 0 on the next edge: first sample sees 1
    @(negedge clk);
    // align: wait until the counter is about to start a period
    while (cnt != '1) @(negedge clk);
    if (EXHAUSTIVE) begin
      for (int unsigned s = 0; s < N; s++)
        for (int unsigned d = 0; d < P; d++)
          run_period(s, d);
    end
    for (int unsigned i = 0; i < RANDOM_PERIODS; i++)
      run_period($urandom_range(N - 1), $urandom_range(P - 1));
    done = 1'b1;
  end
endmodule
