// tb_mpwm_core: self-checking testbench of the MPWM generator.
// Runs a 5-bit generator through every splitting factor and duty (the
// sizes of the paper's waveform figures), the paper's worked example
// (N = 5, SF = 2, Duty = 19: pulses of 5, 5, 5 and 4 clocks, sub-regions
// visited in the order 0, 2, 1, 3 of rank), and a 12-bit generator
// through random (SF, duty) periods. Expected values come from
// mpwm_core_checker's sub-region model, not from the counter rearrangement.
module tb_mpwm_core;
  timeunit 1ns; timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b0;
  int   c5, f5, c12, f12, checks, failures;
  logic d5, d12;

  always #5 clk = ~clk;

  mpwm_core_checker #(.N(5),  .EXHAUSTIVE(1'b1), .RANDOM_PERIODS(0))  u5  (.clk, .rst_n, .checks(c5),  .failures(f5),  .done(d5));
  mpwm_core_checker #(.N(12), .EXHAUSTIVE(1'b0), .RANDOM_PERIODS(24)) u12 (.clk, .rst_n, .checks(c12), .failures(f12), .done(d12));

  // The worked example, checked directly: count high clocks per 8-clock
  // sub-region of one period of a separate 5-bit generator.
  logic       ex_en;
  logic [2:0] ex_sf;
  logic [4:0] ex_duty, ex_cnt, ex_cr;
  logic       ex_pe, ex_out;
  int         ex_checks = 0, ex_fail = 0;
  mpwm_core #(.N(5)) u_ex (.clk, .rst_n, .en(ex_en), .sf(ex_sf), .duty(ex_duty),
                           .cnt(ex_cnt), .c_r(ex_cr), .period_end(ex_pe), .mpwm_out(ex_out));
  initial begin
    int widths[4];
    int expect_w[4] = '{5, 5, 5, 4};
    logic prev = 1'b0;
    ex_en = 1'b0; ex_sf = 3'd2; ex_duty = 5'd19;
    @(posedge rst_n);
    @(negedge clk); ex_en = 1'b1;
    do @(negedge clk); while (ex_cnt != 5'd0);
    widths = '{0, 0, 0, 0};
    for (int t = 0; t < 32; t++) begin
      if (ex_out) widths[t / 8]++;
      // a pulse may only start at the beginning of a sub-region
      if (t % 8 != 0 && ex_out && !prev) ex_fail++;
      prev = ex_out;
      @(negedge clk);
    end
    for (int r = 0; r < 4; r++) begin
      ex_checks++;
      if (widths[r] != expect_w[r]) begin
        ex_fail++;
        $display("FAIL example sub-region %0d width %0d expected %0d", r, widths[r], expect_w[r]);
      end
    end
  end

  initial begin
    #12 rst_n = 1'b1;
    wait (d5 && d12);
    repeat (40) @(negedge clk);
    checks = c5 + c12 + ex_checks;
    failures = f5 + f12 + ex_fail;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c5 + c12 + ex_checks, f5 + f12 + ex_fail + 1);
    $finish;
  end
endmodule
