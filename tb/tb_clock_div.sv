// tb_clock_div: checks the 640 -> 160 -> 40 MHz division: periods (4 and 16
// system clock cycles), coincidence of the rising edges and the ph160 / ph640
// cycle indices.
module tb_clock_div;
  timeunit 1ps;
  timeprecision 1fs;

  logic clk640 = 0, rst_n = 0;
  logic clk160, clk40;
  logic [1:0] ph640, ph160;
  int checks = 0, failures = 0;

  always #781.25 clk640 = ~clk640;

  clock_div dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  int n640 = 0, n160 = 0;
  realtime t160 = 0, t40 = 0;
  always @(posedge clk640) n640++;
  always @(posedge clk160) begin
    if (rst_n && n160 > 0) check($realtime - t160 == 6250.0, "clk160 period");
    // ph640 sampled here has already advanced to 0 at this edge
    if (rst_n) check(ph640 == 2'd0, "ph640 is 0 at clk160 rising edge");
    t160 = $realtime;
    n160++;
  end
  int n40 = 0;
  always @(posedge clk40) begin
    if (rst_n && n40 > 0) check($realtime - t40 == 25000.0, "clk40 period");
    check($realtime == t160, "clk40 edge coincides with clk160 edge");
    t40 = $realtime;
    n40++;
  end
  // ph160 seen by a clk160-domain process is the index of the cycle ending.
  logic [1:0] ph_prev;
  bit ph_init = 0;
  always @(posedge clk160) begin
    if (ph_init) check(ph160 == ph_prev + 2'd1 || !rst_n, "ph160 increments");
    ph_prev = ph160; ph_init = rst_n;
  end
  always @(posedge clk40) check(ph160 == 2'd0, "clk40 rises at the start of cycle 0");

  initial begin
    repeat (5) @(negedge clk640);
    rst_n = 1;
    repeat (400) @(posedge clk640);
    check(n40 >= 24, "clk40 ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
