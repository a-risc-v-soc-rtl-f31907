// tb_sram: checks the 128 KB SRAM at its full size. Random word and byte-
// masked writes and reads over the whole address range against an
// associative-array model; every access must be answered exactly one clock
// later, and read data must match the model. Back-to-back accesses and a
// write followed at once by a read of the same word are included.
module tb_sram;
  timeunit 1ns; timeprecision 1ps;
  import soc_pkg::*;

  logic     clk = 1'b0, rst_n = 1'b0;
  bus_req_t req;
  bus_rsp_t rsp;
  int       checks = 0, failures = 0;
  logic [31:0] model [int unsigned];

  always #5 clk = ~clk;

  sram #(.BYTES(128 * 1024)) dut (.clk, .rst_n, .req, .rsp);

  task automatic access(logic we, logic [31:0] addr, logic [31:0] wdata, logic [3:0] be);
    logic [31:0] expect_d;
    int unsigned w = addr[16:2];
    req = '{valid: 1'b1, we: we, addr: addr, wdata: wdata, be: be};
    @(posedge clk);
    checks++;
    if (!rsp.ready) begin failures++; $display("FAIL not ready"); end
    if (we) begin
      expect_d = model.exists(w) ? model[w] : 32'h0;
      for (int b = 0; b < 4; b++) if (be[b]) expect_d[8*b +: 8] = wdata[8*b +: 8];
      model[w] = expect_d;
    end
    #1;
    req.valid = 1'b0;
    checks++;
    if (!rsp.rvalid) begin failures++; $display("FAIL no response"); end
    if (!we && model.exists(w)) begin
      checks++;
      if (rsp.rdata !== model[w]) begin
        failures++;
        $display("FAIL read %h: %h expected %h", addr, rsp.rdata, model[w]);
      end
    end
  endtask

  initial begin
    req = '0;
    #12 rst_n = 1'b1;
    @(negedge clk);
    // first write every word touched with a full mask so the model is exact
    for (int i = 0; i < 600; i++) begin
      automatic logic [31:0] a = {15'd0, 15'($urandom_range(32767)), 2'b00};
      access(1'b1, a, $urandom, 4'hF);
      access(1'b0, a, 32'h0, 4'h0);
    end
    // then random mixed traffic over those words, with byte masks
    for (int i = 0; i < 3000; i++) begin
      automatic int unsigned keys[$];
      automatic int unsigned k;
      foreach (model[w]) keys.push_back(w);
      k = keys[$urandom_range(keys.size() - 1)];
      if ($urandom_range(1)) access(1'b1, {15'd0, 15'(k), 2'b00}, $urandom, 4'($urandom));
      else                   access(1'b0, {15'd0, 15'(k), 2'b00}, 32'h0, 4'h0);
    end
    // top and bottom words
    access(1'b1, 32'h0001_FFFC, 32'hCAFE_F00D, 4'hF);
    access(1'b1, 32'h0000_0000, 32'h1234_5678, 4'hF);
    access(1'b0, 32'h0001_FFFC, 32'h0, 4'h0);
    access(1'b0, 32'h0000_0000, 32'h0, 4'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
