// tb_timestamp_counter: the timestamp holds 0 until the start signal, then
// counts 40 MHz cycles and wraps after 512; a second start restarts it.
module tb_timestamp_counter;
  import ts1_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  logic clk40 = 0, rst_n = 0, ts_start = 0;
  logic [8:0] ts;
  logic running;
  int checks = 0, failures = 0;

  always #12500 clk40 = ~clk40;
  timestamp_counter dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s ts=%0d at %t", what, ts, $time); end
  endtask

  initial begin
    int exp;
    repeat (2) @(negedge clk40);
    rst_n = 1;
    repeat (10) @(negedge clk40);
    check(ts == 0 && !running, "idle before start");
    ts_start = 1; @(negedge clk40); ts_start = 0;
    check(ts == 0 && running, "zero at start");
    exp = 0;
    for (int i = 0; i < 1100; i++) begin
      @(negedge clk40);
      exp = (exp + 1) % 512;
      check(ts == 9'(exp), "counts and wraps");
    end
    ts_start = 1; @(negedge clk40); ts_start = 0;
    check(ts == 0, "restart");
    @(negedge clk40);
    check(ts == 1, "counts after restart");
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
