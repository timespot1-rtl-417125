// tb_tdc_vernier_core: the Vernier core with two behavioural DCOs of known
// periods (T0 = 1060 ps, T1 = 1012 ps, resolution 48 ps) and a 25 ns
// reference.  Hits arrive at random phases before a reference edge with
// random widths.  For each hit the testbench checks that the coincidence
// flag is set, that both DCOs stop, that (cnt0-1)*T0 - (cnt1-1)*T1 lies in
// the Vernier bin just below the true hit-to-edge time, that ToT counts the
// DCO_0 periods inside the pulse, and that the conversion ends within
// T0*T1/(T0-T1) after the reference edge.
module tb_tdc_vernier_core;
  import ts1_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int T0 = 2 * (10 + 2 * 60 + 4 * 100);              // 1060
  localparam int T1 = 2 * (10 + 2 * 60 + 4 * (100 - 6));        // 1012

  logic hit = 0, clk40 = 0, clr = 0, cal_en0 = 0, cal_en1 = 0;
  logic ck_0, ck_1, dco_en0, dco_en1, start, stop, cc;
  logic [7:0] cnt0, cnt1, cnt_tot;
  int checks = 0, failures = 0;

  always #12500 clk40 = ~clk40;

  tdc_dco u_d0 (.enable(dco_en0), .fine_ctrls(fine_code_to_ctrl(4'd0)), .coarse_ctrls(2'd2), .dco_clk(ck_0));
  tdc_dco u_d1 (.enable(dco_en1), .fine_ctrls(fine_code_to_ctrl(4'd4)), .coarse_ctrls(2'd2), .dco_clk(ck_1));

  tdc_vernier_core dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  time t_cc;
  always @(posedge cc) t_cc = $time;

  initial begin
    #1 clr = 1;
    #100000 clr = 0;
    for (int i = 0; i < 300; i++) begin
      int ta_true, width, x, tot_exp;
      time t_hit, t_ref;
      // Next reference rising edge is at a multiple of 25000 ps.
      @(posedge clk40);
      #1000;
      t_ref = $time - 1000 + 25000;
      ta_true = (i < 10) ? 25000 - 3125 * (i % 7 + 1) + i : int'($urandom_range(60, 23900));
      width = int'($urandom_range(3000, 120000));
      #(t_ref - ta_true - $time);
      t_hit = $time;
      hit = 1;
      #(width);
      hit = 0;
      #200000;
      check(cc, "coincidence found");
      check(!start && !stop && !dco_en0 && !dco_en1, "both DCOs stopped");
      x = (int'(cnt0) - 1) * T0 - (int'(cnt1) - 1) * T1;
      check(ta_true - x >= 0 && ta_true - x < (T0 - T1) + 2, $sformatf("TA bin: true %0d formula %0d cnt0 %0d cnt1 %0d tcc-tref %0d", ta_true, x, cnt0, cnt1, t_cc - t_ref));
      tot_exp = width / T0;   // DCO_0 rising edges inside the pulse
      check(int'(cnt_tot) == tot_exp || int'(cnt_tot) == tot_exp + 1 || (tot_exp >= 255 && cnt_tot == 8'hFF),
            $sformatf("ToT %0d vs %0d", cnt_tot, tot_exp));
      check(t_cc - t_ref <= time'(T0 * T1 / (T0 - T1) + 2 * T1), "conversion time bound");
      clr = 1; #1000 clr = 0;
      check(cnt0 == 0 && cnt1 == 0 && cnt_tot == 0 && !cc, "cleared");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #400us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
