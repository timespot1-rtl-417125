// tb_tdc_dco: runs the behavioural DCO at several fine/coarse settings and
// compares the measured period with the sum of the stage delays worked out
// here; checks that the output rests high when disabled, that the first
// rising edge comes one period after enable, and that faster settings give
// shorter periods.
module tb_tdc_dco;
  import ts1_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  logic enable = 0;
  logic [11:0] fine;
  logic [1:0] coarse;
  logic dco_clk;
  int checks = 0, failures = 0;

  tdc_dco #(.OFFSET_PS(3)) dut (.enable, .fine_ctrls(fine), .coarse_ctrls(coarse), .dco_clk);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  function automatic int expected_period(input int f, input int c);
    int h = 10 + 3 + c * 60;
    for (int i = 0; i < 4; i++) begin
      int lvl = f / 4 + ((i < f % 4) ? 1 : 0);
      if (lvl > 2) lvl = 2;
      h += 100 - 6 * lvl;
    end
    return 2 * h;
  endfunction

  int edges;
  time t_first, t_last;
  always @(posedge dco_clk) begin
    if (edges == 0) t_first = $time;
    t_last = $time;
    edges++;
  end

  initial begin
    int prev;
    fine = fine_code_to_ctrl(0);
    coarse = 3;
    #1000;
    check(dco_clk == 1'b1, "rests high in stand-by");
    edges = 0;
    #5000;
    check(edges == 0, "no edges while disabled");
    for (int c = 3; c >= 0; c--) begin
      prev = 1 << 30;
      for (int f = 0; f <= 8; f++) begin
        time t_en;
        fine = fine_code_to_ctrl(4'(f));
        coarse = 2'(c);
        #100;
        edges = 0;
        t_en = $time;
        enable = 1;
        #20000;
        enable = 0;
        #3000;
        check(t_first - t_en == time'(expected_period(f, c)), "first edge one period after enable");
        check((t_last - t_first) == time'((edges - 1) * expected_period(f, c)), "period");
        check(expected_period(f, c) < prev, "faster setting, shorter period");
        prev = expected_period(f, c);
        check(dco_clk == 1'b1, "back to rest");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
