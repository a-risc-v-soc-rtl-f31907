// tb_vcdl: checks that tap P[i] of the 16-cell line lags the input by
// (i+1) cell delays, for two control voltages and both edge directions.
module tb_vcdl;
  timeunit 1ns; timeprecision 1ps;

  logic        in = 1'b0;
  real         vc = 0.55;
  logic [15:0] p;
  int          checks = 0, failures = 0;
  realtime     t_in;
  realtime     t_tap [16];

  vcdl #(.STAGES(16)) dut (.in, .vc, .p);

  task automatic run(real v, logic val);
    real tau;
    vc = v;
    #30;
    tau = 0.9 - 0.5 * v;
    t_in = $realtime;
    in = val;
    // the taps switch in order, so wait for each in turn
    for (int i = 0; i < 16; i++) begin
      wait (p[i] === val);
      t_tap[i] = $realtime;
    end
    #30;
    for (int i = 0; i < 16; i++) begin
      checks += 2;
      if (p[i] !== val) begin failures++; $display("FAIL tap %0d value", i); end
      if (t_tap[i] - t_in < (i + 1) * tau - 0.003 || t_tap[i] - t_in > (i + 1) * tau + 0.003) begin
        failures++;
        $display("FAIL tap %0d delay %f expected %f", i, t_tap[i] - t_in, (i + 1) * tau);
      end
    end
  endtask

  initial begin
    run(0.55, 1'b1);
    run(0.55, 1'b0);
    run(0.1, 1'b1);
    run(0.1, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
