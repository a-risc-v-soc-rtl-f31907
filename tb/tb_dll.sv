// tb_dll: two DLLs, one on a 10 ns clock and one on a 12.5 ns clock. Each
// must raise locked within 1000 clocks, and a separate 16-cell line driven
// by the DLL's vc (as the signal path is) must then delay a clock edge by
// one period within 40 ps, and each cell by T/16.
module tb_dll;
  timeunit 1ns; timeprecision 1ps;

  logic clk_a = 1'b0, clk_b = 1'b0, rst_n = 1'b0;
  real  vc_a, vc_b;
  logic lock_a, lock_b;
  int   checks = 0, failures = 0;

  always #5    clk_a = ~clk_a;
  always #6.25 clk_b = ~clk_b;

  dll u_a (.clk(clk_a), .rst_n, .vc(vc_a), .locked(lock_a));
  dll u_b (.clk(clk_b), .rst_n, .vc(vc_b), .locked(lock_b));

  logic        probe_a = 1'b0, probe_b = 1'b0;
  logic [15:0] pa, pb;
  vcdl u_line_a (.in(probe_a), .vc(vc_a), .p(pa));
  vcdl u_line_b (.in(probe_b), .vc(vc_b), .p(pb));

  task automatic measure(ref logic probe, ref logic [15:0] taps, input real period, input string name);
    realtime t0, t_first, t_last;
    #(3 * period);
    t0 = $realtime;
    probe = ~probe;
    wait (taps[0] === probe);
    t_first = $realtime;
    wait (taps[15] === probe);
    t_last = $realtime;
    checks += 2;
    if (t_last - t0 < period - 0.04 || t_last - t0 > period + 0.04) begin
      failures++;
      $display("FAIL %s line delay %f, period %f", name, t_last - t0, period);
    end
    if (t_first - t0 < period / 16 - 0.01 || t_first - t0 > period / 16 + 0.01) begin
      failures++;
      $display("FAIL %s cell delay %f, expected %f", name, t_first - t0, period / 16);
    end
  endtask

  initial begin
    #23 rst_n = 1'b1;
    checks++;
    if (lock_a || lock_b) begin failures++; $display("FAIL locked right after reset"); end
    fork
      begin
        repeat (1000) @(posedge clk_a);
        checks++;
        if (!lock_a) begin failures++; $display("FAIL 10 ns DLL not locked"); end
      end
      begin
        repeat (1000) @(posedge clk_b);
        checks++;
        if (!lock_b) begin failures++; $display("FAIL 12.5 ns DLL not locked"); end
      end
    join
    measure(probe_a, pa, 10.0, "10ns");
    measure(probe_b, pb, 12.5, "12.5ns");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
