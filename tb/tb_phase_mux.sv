// tb_phase_mux: checks the 16:1 phase multiplexer exhaustively. For every
// select value, a one-hot and a one-cold pattern on the taps plus random
// patterns; the output must equal the selected tap.
module tb_phase_mux;
  timeunit 1ns; timeprecision 1ps;

  logic [15:0] p;
  logic [3:0]  d_ctrl;
  logic        out;
  int          checks = 0, failures = 0;

  phase_mux #(.STAGES(16)) dut (.p, .d_ctrl, .out);

  task automatic check(logic [15:0] pat, int unsigned sel);
    p = pat;
    d_ctrl = 4'(sel);
    #1;
    checks++;
    if (out !== pat[sel]) begin
      failures++;
      $display("FAIL p=%h sel=%0d out=%0b", pat, sel, out);
    end
  endtask

  initial begin
    for (int unsigned s = 0; s < 16; s++) begin
      for (int unsigned h = 0; h < 16; h++) begin
        check(16'(1) << h, s);
        check(~(16'(1) << h), s);
      end
      repeat (16) check(16'($urandom), s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
