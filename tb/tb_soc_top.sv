// tb_soc_top: end-to-end test of the SoC at its default sizes (12-bit
// MPWM counter plus 4 fine bits, two 128 KB SRAMs, 12 DMA channels, 10 ns
// clock). The testbench plays the RV32 core (instruction and data bus
// ports) and an external memory with random wait states.
//
// The core writes a program image into the I-SRAM and keeps fetching it
// on the instruction port, puts eight DAC samples into the D-SRAM, sets
// up DMA channel 5 (D-SRAM to external memory), channel 6 (external
// memory to I-SRAM) and channel 0 (samples to the DAC's DUTY register,
// one per MPWM period, paced by the DAC's request), then enables the DAC
// with SF = 3. Every MPWM period (4096 clocks) the high time of dac_out is
// measured and must equal the sample due in that period:
// coarse + fine/16 clocks, the fine part only when coarse >= SN = 8.
// Finally the core switches the DAC to SF = 7 and checks one more period.
//
// Mechanisms that must each happen at least once: core stalled by bus
// contention, external memory wait state, paced DMA transfer, DMA block
// copy both ways, DLL lock, fine extension, fine bits ignored below SN,
// settings applied at a period boundary, SF switch, DMA interrupt.
module tb_soc_top;
  timeunit 1ns; timeprecision 1ps;
  import soc_pkg::*;

  localparam real T = 10.0;
  localparam int  P = 4096;

  logic     clk = 1'b0, rst_n = 1'b0;
  bus_req_t core_i_req, core_d_req, ext_req;
  bus_rsp_t core_i_rsp, core_d_rsp, ext_rsp;
  logic [11:1] periph_dreq = '0;
  logic     dma_irq, dac_out, dac_coarse_out, dac_dll_locked;

  int checks = 0, failures = 0;
  int n_core_stall = 0, n_ext_wait = 0, n_paced = 0, n_fine = 0, n_fine_ignored = 0;
  int n_boundary = 0, n_sf_switch = 0, n_lock = 0, n_irq = 0, n_copy_out = 0, n_copy_in = 0;
  int n_fetch = 0;

  always #(T / 2) clk = ~clk;

  soc_top dut (.*);

  task automatic fail(string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  // ---------------- external memory model ----------------
  logic [31:0] ext_mem [int unsigned];
  logic        ext_ready = 1'b1, ext_ack = 1'b0;
  logic [31:0] ext_data = '0;
  always @(negedge clk) ext_ready = ($urandom_range(3) != 0);
  assign ext_rsp = '{ready: ext_ready, rvalid: ext_ack, rdata: ext_data};
  always @(posedge clk) begin
    ext_ack <= ext_req.valid && ext_ready;
    if (ext_req.valid && !ext_ready) n_ext_wait++;
    if (ext_req.valid && ext_ready) begin
      if (ext_req.we) ext_mem[ext_req.addr] = ext_req.wdata;
      else ext_data <= ext_mem.exists(ext_req.addr) ? ext_mem[ext_req.addr] : 32'hBAD0_0000;
    end
  end

  // ---------------- core data port ----------------
  task automatic d_access(logic we, logic [31:0] addr, logic [31:0] wdata, output logic [31:0] rdata);
    @(negedge clk);
    core_d_req = '{valid: 1'b1, we: we, addr: addr, wdata: wdata, be: 4'hF};
    forever begin
      @(posedge clk);
      if (core_d_rsp.ready) break;
      n_core_stall++;
    end
    #1 core_d_req = '0;
    @(posedge clk);
    rdata = core_d_rsp.rdata;
    checks++;
    if (!core_d_rsp.rvalid) fail("data port: no response");
  endtask

  task automatic d_wr(logic [31:0] addr, logic [31:0] wdata);
    logic [31:0] unused;
    d_access(1'b1, addr, wdata, unused);
  endtask

  // ---------------- core instruction port: endless fetch ----------------
  function automatic logic [31:0] prog_word(int i);
    return 32'h0001_0013 ^ (32'(i) << 7);
  endfunction
  logic fetch_on = 1'b0;
  initial begin
    core_i_req = '0;
    wait (fetch_on);
    forever begin
      for (int i = 0; i < 64 && fetch_on; i++) begin
        @(negedge clk);
        core_i_req = '{valid: 1'b1, we: 1'b0, addr: 32'(4 * i), wdata: 0, be: 4'hF};
        forever begin
          @(posedge clk);
          if (core_i_rsp.ready) break;
          n_core_stall++;
        end
        #1 core_i_req = '0;
        @(posedge clk);
        checks++;
        if (!core_i_rsp.rvalid || core_i_rsp.rdata !== prog_word(i)) fail($sformatf("fetch %0d", i));
        n_fetch++;
      end
      if (!fetch_on) break;
    end
  end

  // ---------------- DAC expectations ----------------
  localparam int NS = 8;
  logic [31:0] samples [NS] = '{32'(1000 << 4 | 3), 32'(2000 << 4 | 15), 32'(37 << 4 | 8),
                                32'(4000 << 4 | 1), 32'(512 << 4 | 0), 32'(3 << 4 | 9),
                                32'(2500 << 4 | 7), 32'(100 << 4 | 12)};
  localparam logic [31:0] DUTY0 = 32'(2048 << 4);

  function automatic real expected_high(logic [31:0] w, int sfv);
    int unsigned coarse = 32'(w[15:4]);
    int unsigned fine = 32'(w[3:0]);
    return T * (coarse + ((coarse >= (1 << sfv)) ? fine / 16.0 : 0.0));
  endfunction

  // high time of dac_out between two times
  realtime t_rise, acc_high;
  always @(dac_out) begin
    if (dac_out) t_rise = $realtime;
    else acc_high += $realtime - t_rise;
  end
  function automatic real high_since(realtime t_start, real acc_start);
    real h = acc_high - acc_start;
    if (dac_out) h += $realtime - ((t_rise > t_start) ? t_rise : t_start);
    return h;
  endfunction

  realtime t_enable;   // time of the clock edge that accepted the enable

  task automatic measure_period(int j, output real h);
    realtime ts;
    real acc0;
    // period j: from edge t_enable + (P*j + 1) clocks, P clocks long
    wait ($realtime >= t_enable + T * (P * j + 1) - 0.001);
    ts = $realtime;
    acc0 = acc_high;
    if (dac_out) begin acc0 = acc0 - ($realtime - t_rise); end
    wait ($realtime >= t_enable + T * (P * (j + 1) + 1) - 0.001);
    h = acc_high - acc0;
    if (dac_out) h += $realtime - t_rise;
  endtask

  always @(posedge dac_dll_locked) n_lock++;
  always @(posedge dma_irq) n_irq++;

  initial begin
    logic [31:0] d;
    real h, e;
    core_d_req = '0;
    for (int i = 0; i < 32; i++) ext_mem[32'h9000_0000 + 32'(4 * i)] = 32'h5A00_0000 + 32'(i);
    #22 rst_n = 1'b1;
    // program image and first fetches
    for (int i = 0; i < 64; i++) d_wr(32'(4 * i), prog_word(i));
    fetch_on = 1'b1;
    // samples, and a block for the external memory
    for (int i = 0; i < NS; i++) d_wr(DSRAM_BASE + 32'h100 + 32'(4 * i), samples[i]);
    for (int i = 0; i < 32; i++) d_wr(DSRAM_BASE + 32'h400 + 32'(4 * i), 32'hC000_0000 + 32'(i));
    // DMA channel 5: D-SRAM -> external, channel 6: external -> I-SRAM
    d_wr(DMA_BASE + 32'h050, DSRAM_BASE + 32'h400);
    d_wr(DMA_BASE + 32'h054, 32'h8000_0000);
    d_wr(DMA_BASE + 32'h058, 32);
    d_wr(DMA_BASE + 32'h060, 32'h9000_0000);
    d_wr(DMA_BASE + 32'h064, 32'h0000_1000);
    d_wr(DMA_BASE + 32'h068, 32);
    // DAC: SF = 3, DMA requests on, not yet enabled; first duty
    d_wr(DAC_BASE + 32'(DAC_CTRL), 32'h0000_0130);
    d_wr(DAC_BASE + 32'(DAC_DUTY), DUTY0);
    // DMA channel 0: samples -> DUTY, paced
    d_wr(DMA_BASE + 32'h000, DSRAM_BASE + 32'h100);
    d_wr(DMA_BASE + 32'h004, DAC_BASE + 32'(DAC_DUTY));
    d_wr(DMA_BASE + 32'h008, NS);
    d_wr(DMA_BASE + 32'h00C, 32'hB);
    d_wr(DMA_BASE + 32'h05C, 32'h7);
    d_wr(DMA_BASE + 32'h06C, 32'h7);
    // enable the DAC; the accepting edge starts its counter
    @(negedge clk);
    core_d_req = '{valid: 1'b1, we: 1'b1, addr: DAC_BASE + 32'(DAC_CTRL), wdata: 32'h0000_0131, be: 4'hF};
    forever begin
      @(posedge clk);
      if (core_d_rsp.ready) break;
      n_core_stall++;
    end
    t_enable = $realtime;
    #1 core_d_req = '0;

    // periods 2 .. NS+3: sample k is due in period k+2, the last one stays
    for (int j = 0; j < NS + 4; j++) begin
      measure_period(j, h);
      if (j < 2) continue;      // initial duty, DLL still locking
      e = expected_high((j - 2 < NS) ? samples[j - 2] : samples[NS - 1], 3);
      checks++;
      if (h < e - 0.2 || h > e + 0.2) fail($sformatf("period %0d: high %f ns, expected %f", j, h, e));
      else begin
        if (j - 2 < NS) begin
          n_paced++;
          n_boundary++;
          if (samples[j - 2][3:0] != 0 && samples[j - 2][15:4] >= 8) n_fine++;
          if (samples[j - 2][3:0] != 0 && samples[j - 2][15:4] < 8) n_fine_ignored++;
        end
      end
    end

    // switch to SF = 7 (128 sub-regions) with a new duty, no DMA
    d_wr(DAC_BASE + 32'(DAC_CTRL), 32'h0000_0071);
    d_wr(DAC_BASE + 32'(DAC_DUTY), 32'(1234 << 4 | 5));
    measure_period(NS + 5, h);
    e = expected_high(32'(1234 << 4 | 5), 7);
    checks++;
    if (h < e - 0.2 || h > e + 0.2) fail($sformatf("SF=7 period: high %f ns, expected %f", h, e));
    else n_sf_switch++;

    // the copies
    for (int i = 0; i < 32; i++) begin
      checks++;
      if (!ext_mem.exists(32'h8000_0000 + 32'(4 * i)) || ext_mem[32'h8000_0000 + 32'(4 * i)] !== 32'hC000_0000 + 32'(i))
        fail($sformatf("copy to external word %0d", i));
      else n_copy_out++;
      d_access(1'b0, 32'h0000_1000 + 32'(4 * i), 0, d);
      checks++;
      if (d !== 32'h5A00_0000 + 32'(i)) fail($sformatf("copy to I-SRAM word %0d: %h", i, d));
      else n_copy_in++;
    end
    // DMA DONE flags: channels 0, 5, 6; then clear
    d_access(1'b0, DMA_BASE + 32'(DMA_DONE), 0, d);
    checks++;
    if (d !== 32'h0000_0061) fail($sformatf("DMA DONE %h", d));
    d_wr(DMA_BASE + 32'(DMA_DONE), 32'hFFF);
    @(negedge clk);
    checks++;
    if (dma_irq) fail("irq not cleared");
    // DAC status: locked, period count
    d_access(1'b0, DAC_BASE + 32'(DAC_STATUS), 0, d);
    checks++;
    if (!d[0] || d[31:16] < 16'(NS + 5)) fail($sformatf("DAC STATUS %h", d));
    fetch_on = 1'b0;
    repeat (10) @(posedge clk);

    $display("mechanisms: core_stall=%0d ext_wait=%0d paced=%0d copy_out=%0d copy_in=%0d lock=%0d fine=%0d fine_ignored=%0d boundary=%0d sf_switch=%0d irq=%0d fetch=%0d",
             n_core_stall, n_ext_wait, n_paced, n_copy_out, n_copy_in, n_lock, n_fine,
             n_fine_ignored, n_boundary, n_sf_switch, n_irq, n_fetch);
    foreach (mech[i]) begin
      checks++;
      if (mech[i] == 0) fail($sformatf("mechanism %0d never happened", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int mech[11];
  always_comb mech = '{n_core_stall, n_ext_wait, n_paced, n_copy_out, n_copy_in, n_lock,
                       n_fine, n_fine_ignored, n_boundary, n_sf_switch, n_irq};

  initial begin
    #(T * P * 20);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
