// tb_rot_fifo: the 32 x 40-bit FIFO at its default size against a queue
// model.  Random pushes and pops (never into a full or out of an empty FIFO,
// as the readout tree guarantees) with phases biased to fill it completely
// and to drain it; checks data order, full, empty and count every cycle.
module tb_rot_fifo;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int W = 40, DEPTH = 32;
  logic clk = 0, rst_n = 1, wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic full, empty;
  logic [5:0] count;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [W-1:0] model [$];

  always #3125 clk = ~clk;
  rot_fifo dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  initial begin
    #1 rst_n = 0;
    #10000 rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int pw;
      pw = ((cyc / 300) % 2 == 0) ? 80 : 20;       // filling / draining phases
      @(negedge clk);
      check(empty == (model.size() == 0), "empty flag");
      check(full == (model.size() == DEPTH), "full flag");
      check(int'(count) == model.size(), "count");
      if (model.size() != 0) check(rd_data == model[0], "head data");
      if (full) n_full++;
      if (empty) n_empty++;
      wr_en   = !full && ($urandom_range(99) < pw);
      rd_en   = !empty && ($urandom_range(99) < 100 - pw);
      wr_data = {8'($urandom), 32'($urandom)};
      @(posedge clk);
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
    end
    check(n_full > 10, "FIFO was full");
    check(n_empty > 10, "FIFO was empty");
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
