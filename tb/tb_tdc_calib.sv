// tb_tdc_calib: calibration against two behavioural DCOs with mismatch
// offsets.  The true periods of every setting are worked out here from the
// model's stage delays.  Checks: step 1 leaves DCO_0 at the slowest coarse
// tap whose period is not above 1100 ps; step 2 stops at the first fine code
// that makes T0 - T1 reach the target; the stored periods are within 2 ps of
// the true ones; and the whole procedure ends in less than 4 us.  Run for
// several mismatch pairs and two resolution targets.
module tb_tdc_calib;
  import ts1_pkg::*;
  timeunit 1ps;
  timeprecision 1fs;

  logic clk640 = 0, rst_n = 1, clk160, clk40;
  logic [1:0] ph640, ph160;
  logic cal_start = 0;
  logic [7:0] res_target;
  logic ck_0, ck_1, cal_en0, cal_en1, cal_busy, cal_done;
  logic [1:0] coarse0, coarse1;
  logic [3:0] fine_code0, fine_code1;
  logic [10:0] t0_ps, t1_ps;
  int checks = 0, failures = 0;
  int off0, off1;

  always #781.25 clk640 = ~clk640;
  clock_div u_clk (.*);

  // Offsets are changed between runs through a small wrapper of delays.
  logic [1:0] sel;
  logic ck0_a, ck1_a, ck0_b, ck1_b, ck0_c, ck1_c;
  tdc_dco #(.OFFSET_PS(0))  d0a (.enable(cal_en0), .fine_ctrls(fine_code_to_ctrl(fine_code0)), .coarse_ctrls(coarse0), .dco_clk(ck0_a));
  tdc_dco #(.OFFSET_PS(0))  d1a (.enable(cal_en1), .fine_ctrls(fine_code_to_ctrl(fine_code1)), .coarse_ctrls(coarse1), .dco_clk(ck1_a));
  tdc_dco #(.OFFSET_PS(-5)) d0b (.enable(cal_en0), .fine_ctrls(fine_code_to_ctrl(fine_code0)), .coarse_ctrls(coarse0), .dco_clk(ck0_b));
  tdc_dco #(.OFFSET_PS(4))  d1b (.enable(cal_en1), .fine_ctrls(fine_code_to_ctrl(fine_code1)), .coarse_ctrls(coarse1), .dco_clk(ck1_b));
  tdc_dco #(.OFFSET_PS(40)) d0c (.enable(cal_en0), .fine_ctrls(fine_code_to_ctrl(fine_code0)), .coarse_ctrls(coarse0), .dco_clk(ck0_c));
  tdc_dco #(.OFFSET_PS(-3)) d1c (.enable(cal_en1), .fine_ctrls(fine_code_to_ctrl(fine_code1)), .coarse_ctrls(coarse1), .dco_clk(ck1_c));
  assign ck_0 = (sel == 0) ? ck0_a : (sel == 1) ? ck0_b : ck0_c;
  assign ck_1 = (sel == 0) ? ck1_a : (sel == 1) ? ck1_b : ck1_c;

  tdc_calib dut (.clk160, .rst_n, .cal_start, .res_target_ps(res_target), .ck_0, .ck_1,
                 .cal_en0, .cal_en1, .coarse0, .coarse1, .fine_code0, .fine_code1,
                 .t0_ps, .t1_ps, .cal_busy, .cal_done);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  function automatic int period(input int f, input int c, input int off);
    int h = 10 + off + c * 60;
    for (int i = 0; i < 4; i++) begin
      int lvl = f / 4 + ((i < f % 4) ? 1 : 0);
      if (lvl > 2) lvl = 2;
      h += 100 - 6 * lvl;
    end
    return 2 * h;
  endfunction

  initial begin
    #1 rst_n = 0;
    #10000 rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      int o0, o1, c_exp, f_exp, tt0, tt1;
      realtime t_s, t_e;
      sel = 2'(run % 3);
      res_target = (run < 3) ? 8'd50 : 8'd30;
      o0 = (sel == 0) ? 0 : (sel == 1) ? -5 : 40;
      o1 = (sel == 0) ? 0 : (sel == 1) ? 4 : -3;
      // Expected settings, worked out independently.
      c_exp = 3;
      while (c_exp > 0 && period(0, c_exp, o0) > 1100) c_exp--;
      f_exp = 1;
      while (f_exp < 8 && period(0, c_exp, o0) - period(f_exp, c_exp, o1) < int'(res_target)) f_exp++;
      tt0 = period(0, c_exp, o0);
      tt1 = period(f_exp, c_exp, o1);
      @(posedge clk160); cal_start <= 1; @(posedge clk160); cal_start <= 0;
      t_s = $realtime;
      wait (cal_busy);
      wait (!cal_busy);
      t_e = $realtime;
      check(coarse0 == 2'(c_exp) && coarse1 == 2'(c_exp), $sformatf("coarse %0d exp %0d", coarse0, c_exp));
      // Trial measures are short (150 ns) and carry a few ps of error, so a
      // neighbour of the exact code is accepted when the true difference is
      // within 8 ps of the target.
      check(fine_code0 == 0 && (fine_code1 == 4'(f_exp) ||
            (tt0 - period(int'(fine_code1), c_exp, o1) >= int'(res_target) - 8 &&
             (fine_code1 == 1 || tt0 - period(int'(fine_code1) - 1, c_exp, o1) < int'(res_target) + 8))),
            $sformatf("fine %0d exp %0d", fine_code1, f_exp));
      tt1 = period(int'(fine_code1), c_exp, o1);
      check(int'(t0_ps) - tt0 <= 2 && tt0 - int'(t0_ps) <= 2, $sformatf("T0 %0d true %0d", t0_ps, tt0));
      check(int'(t1_ps) - tt1 <= 2 && tt1 - int'(t1_ps) <= 2, $sformatf("T1 %0d true %0d", t1_ps, tt1));
      check(t_e - t_s < 4000000.0, $sformatf("calibration time %0t", t_e - t_s));
      $display("run %0d: coarse %0d fine1 %0d T0 %0d (%0d) T1 %0d (%0d) time %0.0f ns",
               run, coarse0, fine_code1, t0_ps, tt0, t1_ps, tt1, (t_e - t_s) / 1000.0);
      repeat (5) @(posedge clk160);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
