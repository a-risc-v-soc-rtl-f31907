// tb_hrmpwm_ctrl: checks the synchronous HR-MPWM control at N = 6.
//  * q is the MPWM waveform of the shadowed (SF, duty), one clock late;
//    the reference is the sub-region model (pulse of duty/SN clocks, one
//    more for ranks below duty mod SN, rank = bit-reversed address).
//  * New settings are applied only from the next period: the testbench
//    changes them at random clocks and keeps its own copy taken at the
//    last clock of each period.
//  * At every falling edge of q, d_ctrl equals the fine code if the pulse
//    ended in the last sub-region, else 0; exactly one falling edge per
//    period carries the fine code when the coarse duty is at least SN.
module tb_hrmpwm_ctrl;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned N = 6;
  localparam int unsigned P = 1 << N;

  logic         clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [2:0]   sf_in = '0;
  logic [N-1:0] duty_in = '0;
  logic [3:0]   fine_in = '0;
  logic         q, qb, load_pulse;
  logic [3:0]   d_ctrl;
  logic [N-1:0] cnt;
  int           checks = 0, failures = 0;
  int           fine_edges = 0, periods = 0, mid_period_changes = 0;

  always #5 clk = ~clk;

  hrmpwm_ctrl #(.N(N), .FINE(4)) dut (.*);

  function automatic bit ref_out(int unsigned sfv, int unsigned d, int unsigned t);
    int unsigned sn = 1 << sfv, l = P >> sfv, a = t / l, pos = t % l, rank = 0;
    for (int unsigned b = 0; b < sfv; b++) if (a[b]) rank |= 1 << (sfv - 1 - b);
    return pos < d / sn + ((rank < d % sn) ? 1 : 0);
  endfunction

  // reference shadow and history
  int unsigned sh_sf = 0, sh_d = 0, sh_f = 0;
  int unsigned c1 = 0, c2 = 0, c1_sf = 0, c1_d = 0, c2_sf = 0;
  logic        q_prev = 1'b0, have_hist = 1'b0;
  int          fine_in_period = 0;

  always @(negedge clk) if (rst_n && en) begin
    if (have_hist) begin
      checks++;
      if (q !== ref_out(c1_sf, c1_d, c1)) begin
        failures++;
        $display("FAIL q=%0b at cnt %0d (SF=%0d duty=%0d)", q, c1, c1_sf, c1_d);
      end
      if (q_prev && !q) begin
        // pulse ended; its last high clock had counter value c2
        automatic bit last = (c2 >> (N - c2_sf)) == ((1 << c2_sf) - 1);
        checks++;
        if (d_ctrl !== (last ? 4'(sh_f_at_c2) : 4'd0)) begin
          failures++;
          $display("FAIL d_ctrl=%0d at falling edge (last=%0b fine=%0d)", d_ctrl, last, sh_f_at_c2);
        end
        if (last && d_ctrl != 0) fine_in_period++;
      end
    end
    q_prev = q;
    c2 = c1; c2_sf = c1_sf; sh_f_at_c2 = sh_f_at_c1;
    c1 = cnt; c1_sf = sh_sf; c1_d = sh_d; sh_f_at_c1 = sh_f;
    have_hist = 1'b1;
    checks++;
    if (load_pulse !== (cnt == '1)) begin failures++; $display("FAIL load_pulse"); end
    // A pulse that ends at counter value c is seen two clocks later, so
    // the falling edges of one period are counted from cnt = 2 to cnt = 1.
    if (cnt == N'(1)) begin
      if (periods > 1) begin
        checks++;
        if (fine_in_period != ((pv_d >= (1 << pv_sf) && pv_f != 0) ? 1 : 0)) begin
          failures++;
          $display("FAIL %0d fine edges in a period (SF=%0d duty=%0d fine=%0d)", fine_in_period, pv_sf, pv_d, pv_f);
        end
        if (fine_in_period != 0) fine_edges++;
      end
      fine_in_period = 0;
    end
    if (cnt == '1) begin
      periods++;
      pv_sf = sh_sf; pv_d = sh_d; pv_f = sh_f;
      sh_sf = sf_in; sh_d = duty_in; sh_f = fine_in;
    end
  end
  int unsigned pv_sf = 0, pv_d = 0, pv_f = 0;
  int unsigned sh_f_at_c1 = 0, sh_f_at_c2 = 0;

  initial begin
    #12 rst_n = 1'b1;
    @(negedge clk);
    en = 1'b1;
    sf_in = 3'd2; duty_in = 6'd19; fine_in = 4'd5;
    repeat (200 * P) begin
      @(posedge clk);
      #1;
      if ($urandom_range(40) == 0) begin
        sf_in   = 3'($urandom_range(N - 1));
        duty_in = 6'($urandom_range(P - 1));
        fine_in = 4'($urandom);
        if (cnt != '0) mid_period_changes++;
      end
    end
    checks++;
    if (fine_edges < 50 || mid_period_changes < 20) begin
      failures++;
      $display("FAIL too few cases: fine edges %0d, mid-period changes %0d", fine_edges, mid_period_changes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300 * P) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
