// tb_hrmpwm: checks the HR-MPWM macro at N = 6 (64-clock period) on a
// 10 ns clock. After the DLL locks, for a list of (SF, coarse, fine)
// settings plus random ones, the high time of dac_out over one whole
// period must equal coarse + fine/16 clocks (fine counted only when the
// coarse duty is at least SN), within 50 ps, and the number of rising
// edges must match the MPWM edge count. It also checks that the fine code
// moves only one falling edge per period: the high time of the clock-
// aligned output stays coarse clocks.
module tb_hrmpwm;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned N = 6;
  localparam int unsigned P = 1 << N;
  localparam real T = 10.0;

  logic         clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [2:0]   sf_in = '0;
  logic [N-1:0] duty_in = '0;
  logic [3:0]   fine_in = '0;
  logic         dac_out, coarse_out, dll_locked, load_pulse;
  logic [N-1:0] cnt;
  int           checks = 0, failures = 0, fine_cases = 0;

  always #(T / 2) clk = ~clk;

  hrmpwm #(.N(N), .FINE(4)) dut (.*);

  // high-time integrator
  realtime t_rise, high_time;
  int      rises;
  logic    measuring = 1'b0;
  always @(dac_out) if (measuring) begin
    if (dac_out) begin t_rise = $realtime; rises++; end
    else high_time += $realtime - t_rise;
  end

  function automatic int unsigned edges_formula(int unsigned sfv, int unsigned d);
    int unsigned sn = 1 << sfv;
    if (d <= sn) return d;
    else if (d <= P - sn) return sn;
    else return P - d;
  endfunction

  task automatic run(int unsigned sfv, int unsigned d, int unsigned f);
    real expect_t;
    int  coarse_high;
    sf_in = 3'(sfv); duty_in = N'(d); fine_in = 4'(f);
    repeat (2 * P + 3) @(posedge clk);   // two period boundaries
    // integrate over exactly one period, from a point where dac_out is low
    // or has a known rising time
    high_time = 0.0; rises = 0; coarse_high = 0;
    if (dac_out) t_rise = $realtime;
    measuring = 1'b1;
    for (int i = 0; i < P; i++) begin
      @(posedge clk);
      if (coarse_out) coarse_high++;
    end
    measuring = 1'b0;
    if (dac_out) high_time += $realtime - t_rise;
    expect_t = T * (d + ((d >= (1 << sfv)) ? f / 16.0 : 0.0));
    checks += 3;
    if (high_time < expect_t - 0.05 || high_time > expect_t + 0.05) begin
      failures++;
      $display("FAIL SF=%0d duty=%0d fine=%0d: high %f ns, expected %f", sfv, d, f, high_time, expect_t);
    end
    if (coarse_high != d) begin
      failures++;
      $display("FAIL SF=%0d duty=%0d: coarse high clocks %0d", sfv, d, coarse_high);
    end
    if (rises != edges_formula(sfv, d) && !(rises == edges_formula(sfv, d) + 1 && d == P - 1)) begin
      failures++;
      $display("FAIL SF=%0d duty=%0d fine=%0d: %0d rising edges, expected %0d", sfv, d, f, rises, edges_formula(sfv, d));
    end
    if (d >= (1 << sfv) && f != 0) fine_cases++;
  endtask

  initial begin
    #12 rst_n = 1'b1;
    @(negedge clk);
    en = 1'b1;
    repeat (600) @(posedge clk);
    checks++;
    if (!dll_locked) begin failures++; $display("FAIL DLL not locked"); end
    run(2, 19, 0);
    run(2, 19, 8);
    run(2, 19, 15);
    run(0, 32, 1);
    run(5, 40, 7);
    run(3, 3, 9);      // coarse below SN: fine has no effect
    run(1, 63, 15);
    for (int i = 0; i < 30; i++)
      run($urandom_range(N - 1), $urandom_range(P - 1), $urandom_range(15));
    checks++;
    if (fine_cases < 10) begin failures++; $display("FAIL only %0d fine cases", fine_cases); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
