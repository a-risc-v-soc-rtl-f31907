// tb_mpwm_dac: checks the MPWM-DAC peripheral at N = 6 on a 10 ns clock.
// Register write and read back (SF above N-1 reads back as N-1), the DLL
// lock bit, the period counter, the DMA request line (rises at a period
// end when enabled, falls on a DUTY write, stays low when disabled), and
// the analog-facing result: the high time of dac_out over one period for
// several DUTY words equals coarse + fine/16 clocks (fine counted when the
// coarse part is at least SN), and a DUTY write takes effect only from the
// next period boundary.
module tb_mpwm_dac;
  timeunit 1ns; timeprecision 1ps;
  import soc_pkg::*;
  localparam int unsigned N = 6;
  localparam int unsigned P = 1 << N;
  localparam real T = 10.0;

  logic     clk = 1'b0, rst_n = 1'b0;
  bus_req_t s_req;
  bus_rsp_t s_rsp;
  logic     dac_out, coarse_out, dll_locked, dreq, period_tick;
  int       checks = 0, failures = 0, ticks = 0;

  always #(T / 2) clk = ~clk;
  always @(posedge clk) if (period_tick) ticks++;

  mpwm_dac #(.N(N), .FINE(4)) dut (.*);

  task automatic wr(logic [11:0] off, logic [31:0] d);
    @(negedge clk);
    s_req = '{valid: 1'b1, we: 1'b1, addr: DAC_BASE + 32'(off), wdata: d, be: 4'hF};
    @(negedge clk);
    s_req = '0;
  endtask

  task automatic rd(logic [11:0] off, output logic [31:0] d);
    @(negedge clk);
    s_req = '{valid: 1'b1, we: 1'b0, addr: DAC_BASE + 32'(off), wdata: 0, be: 4'hF};
    @(negedge clk);
    s_req = '0;
    d = s_rsp.rdata;
  endtask

  task automatic expect_eq(logic [31:0] got, logic [31:0] want, string what);
    checks++;
    if (got !== want) begin failures++; $display("FAIL %s: %h expected %h", what, got, want); end
  endtask

  // high time of dac_out over one period, window starting at a period boundary
  real high;
  task automatic measure();
    realtime t_r;
    @(posedge clk iff period_tick);
    @(posedge clk);
    @(posedge clk);
    high = 0.0;
    if (dac_out) t_r = $realtime;
    for (int i = 0; i < P; i++) begin
      fork
        begin
          @(posedge clk);
        end
        begin
          forever begin
            @(dac_out);
            if (dac_out) t_r = $realtime; else high += $realtime - t_r;
          end
        end
      join_any
      disable fork;
    end
    if (dac_out) high += $realtime - t_r;
  endtask

  task automatic check_duty(int unsigned sfv, int unsigned coarse, int unsigned fine);
    real h;
    real e;
    wr(DAC_DUTY, 32'((coarse << 4) | fine));
    @(posedge clk iff period_tick);   // loaded here
    measure();
    h = high;
    e = T * (coarse + ((coarse >= (1 << sfv)) ? fine / 16.0 : 0.0));
    checks++;
    if (h < e - 0.05 || h > e + 0.05) begin
      failures++;
      $display("FAIL SF=%0d coarse=%0d fine=%0d: high %f expected %f", sfv, coarse, fine, h, e);
    end
  endtask

  initial begin
    logic [31:0] d;
    real h;
    s_req = '0;
    #12 rst_n = 1'b1;
    rd(DAC_STATUS, d); expect_eq(d[0], 1'b0, "not locked after reset");
    wr(DAC_CTRL, 32'h0000_0021);                 // enable, SF = 2
    rd(DAC_CTRL, d);   expect_eq(d, 32'h0000_0021, "CTRL readback");
    wr(DAC_CTRL, 32'h0000_00F1);                 // SF = 15 -> clamped
    rd(DAC_CTRL, d);   expect_eq(d, 32'h0000_0051, "SF clamped to N-1");
    wr(DAC_CTRL, 32'h0000_0021);
    wr(DAC_DUTY, 32'h0000_0135);
    rd(DAC_DUTY, d);   expect_eq(d, 32'h0000_0135, "DUTY readback");
    repeat (600) @(posedge clk);
    rd(DAC_STATUS, d); expect_eq(d[0], 1'b1, "DLL locked");
    expect_eq(32'(d[31:16]), 32'(ticks), "period count");
    checks++;
    if (ticks < 8) begin failures++; $display("FAIL only %0d periods", ticks); end
    // no DMA request while disabled
    repeat (2 * P) @(posedge clk);
    expect_eq(32'(dreq), 0, "dreq off");
    // waveform
    check_duty(2, 19, 0);
    check_duty(2, 19, 9);
    check_duty(2, 3, 9);
    wr(DAC_CTRL, 32'h0000_0001);                 // SF = 0, plain PWM
    check_duty(0, 40, 15);
    wr(DAC_CTRL, 32'h0000_0051);                 // SF = 5
    check_duty(5, 50, 4);
    // a DUTY write mid-period changes nothing until the boundary
    wr(DAC_DUTY, 32'(30 << 4));
    @(posedge clk iff period_tick);
    repeat (10) @(posedge clk);
    wr(DAC_DUTY, 32'(10 << 4));
    measure();
    h = high;                                    // window starts at next boundary: 10
    checks++;
    if (h < 10.0 * T - 0.05 || h > 10.0 * T + 0.05) begin
      failures++;
      $display("FAIL boundary update: high %f ns, expected %f", h, 10.0 * T);
    end
    // DMA requests
    wr(DAC_CTRL, 32'h0000_0151);
    @(posedge clk iff period_tick);
    @(negedge clk);
    expect_eq(32'(dreq), 1, "dreq raised at period end");
    rd(DAC_STATUS, d); expect_eq(d[1], 1'b1, "dreq in STATUS");
    wr(DAC_DUTY, 32'(12 << 4));
    expect_eq(32'(dreq), 0, "dreq cleared by DUTY write");
    @(posedge clk iff period_tick);
    @(negedge clk);
    expect_eq(32'(dreq), 1, "dreq raised again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
