// tb_delay_cell: checks the delay law of the behavioural delay cell
// (TAU0_NS - KV_NS * vc, 0.9 ns - 0.5 ns/V * vc by default) at several
// control voltages, for rising and falling edges, and that a pulse shorter
// than the delay still passes (transport delay).
module tb_delay_cell;
  timeunit 1ns; timeprecision 1ps;

  logic a = 1'b0, y;
  real  vc = 0.0;
  int   checks = 0, failures = 0;
  realtime t_in;

  delay_cell dut (.a, .vc, .y);

  task automatic edge_check(real v, logic val);
    real expect_d;
    vc = v;
    #5;
    expect_d = 0.9 - 0.5 * v;
    t_in = $realtime;
    a = val;
    wait (y === val);
    checks++;
    if ($realtime - t_in < expect_d - 0.002 || $realtime - t_in > expect_d + 0.002) begin
      failures++;
      $display("FAIL vc=%f delay %f expected %f", v, $realtime - t_in, expect_d);
    end
  endtask

  initial begin
    #2;
    foreach (vc_list[i]) begin
      edge_check(vc_list[i], 1'b1);
      edge_check(vc_list[i], 1'b0);
    end
    // a 0.2 ns pulse through a 0.9 ns cell arrives whole
    vc = 0.0;
    #5;
    a = 1'b1; #0.2 a = 1'b0;
    #0.75;
    checks++;
    if (y !== 1'b1) begin failures++; $display("FAIL short pulse lost"); end
    #0.2;
    checks++;
    if (y !== 1'b0) begin failures++; $display("FAIL short pulse too long"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real vc_list[4] = '{0.0, 0.3, 0.55, 1.0};

  initial begin
    #1000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
