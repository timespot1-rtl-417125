// tb_tdc_ta_calc: random counter values and periods against the formula
// TA = (cnt0-1)*T0 - (cnt1-1)*T1 computed in integers here, with clamping.
module tb_tdc_ta_calc;
  import ts1_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  logic [7:0] cnt0, cnt1;
  logic [10:0] t0, t1;
  logic [14:0] ta;
  int checks = 0, failures = 0;

  tdc_ta_calc dut (.cnt0, .cnt1, .t0_ps(t0), .t1_ps(t1), .ta_ps(ta));

  initial begin
    for (int i = 0; i < 4000; i++) begin
      longint e;
      cnt0 = 8'($urandom_range(0, 255));
      cnt1 = (i % 3 == 0) ? 8'($urandom_range(0, 255)) : 8'(cnt0 - $urandom_range(0, 30));
      t0 = 11'($urandom_range(700, 1300));
      t1 = 11'(t0 - $urandom_range(0, 60));
      #1;
      e = (longint'(cnt0) - 1) * t0 - (longint'(cnt1) - 1) * t1;
      if (e < 0) e = 0;
      if (e > 32767) e = 32767;
      checks++;
      if (ta !== 15'(e)) begin
        failures++;
        $display("FAIL cnt0=%0d cnt1=%0d T0=%0d T1=%0d ta=%0d exp=%0d", cnt0, cnt1, t0, t1, ta, e);
      end
    end
    // A worked example: 21 and 20 counts, 1000 / 950 ps -> 20000 - 18050 = 1950.
    cnt0 = 21; cnt1 = 20; t0 = 1000; t1 = 950; #1;
    checks++; if (ta != 15'd1950) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
