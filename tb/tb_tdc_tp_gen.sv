// tb_tdc_tp_gen: fires the test pulse at all seven phases and several widths
// and measures, on the waveform, the delay of its rising edge from the last
// clk40 rising edge (k * 3.125 ns) and its width ((w+1) * 6.25 ns).
module tb_tdc_tp_gen;
  timeunit 1ps;
  timeprecision 1fs;

  logic clk640 = 0, rst_n = 1, clk160, clk40;
  logic [1:0] ph640, ph160;
  logic tp_fire = 0, tp, busy;
  logic [2:0] tp_phase;
  logic [4:0] tp_width;
  int checks = 0, failures = 0;

  always #781.25 clk640 = ~clk640;
  clock_div u_clk (.*);
  tdc_tp_gen dut (.clk160, .rst_n, .ph160, .tp_fire, .tp_phase, .tp_width, .tp, .busy);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  realtime t40, t_rise, t_fall;
  int n_rise = 0;
  always @(posedge clk40) t40 = $realtime;
  always @(posedge tp) begin t_rise = $realtime; n_rise++; check($realtime - t40 == real'(3125 * int'(tp_phase)), $sformatf("phase %0d offset %0.1f", tp_phase, $realtime - t40)); end
  always @(negedge tp) t_fall = $realtime;

  initial begin
    #1 rst_n = 0;
    #10000 rst_n = 1;
    for (int w = 0; w < 32; w += 5) begin
      for (int k = 1; k <= 7; k++) begin
        int n0;
        n0 = n_rise;
        tp_phase = 3'(k);
        tp_width = 5'(w);
        repeat (3) @(posedge clk160);
        tp_fire <= 1;
        repeat (5) @(posedge clk160);   // a long request still gives one pulse
        tp_fire <= 0;
        wait (!busy);
        repeat (40) @(posedge clk160);
        check(n_rise == n0 + 1, "exactly one pulse");
        check(t_fall - t_rise == real'(6250 * (w + 1)), $sformatf("width %0.1f for w=%0d", t_fall - t_rise, w));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
