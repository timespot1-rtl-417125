// tb_ddr_serializer: a byte stream that changes every clk160 cycle is
// serialized at 640 MHz DDR and recovered by the link receiver model.  The
// received bytes must equal the sent sequence in order, and the link must
// carry one byte per clk160 cycle, 1280 Mb/s.
module tb_ddr_serializer;
  timeunit 1ps;
  timeprecision 1fs;

  logic clk640 = 0, rst_n = 1, clk160, clk40;
  logic [1:0] ph640, ph160;
  logic [7:0] byte_in = 8'h00;
  logic dout;
  int checks = 0, failures = 0;

  always #781.25 clk640 = ~clk640;
  clock_div u_clk (.*);
  ddr_serializer dut (.clk640, .rst_n, .ph640, .byte_in, .dout);
  link_rx_model u_rx (.clk640, .ph640, .dout, .header(8'hFF), .idle(8'h00));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [7:0] seq [$];

  initial begin
    int first, nb0;
    realtime t0;
    #1 rst_n = 0;
    #10000 rst_n = 1;
    repeat (10) @(posedge clk160);
    seq.push_back(8'hA5);                      // marker
    for (int i = 0; i < 300; i++) seq.push_back(8'($urandom));
    foreach (seq[i]) begin
      byte_in <= seq[i];
      @(posedge clk160);
    end
    byte_in <= 8'h00;
    repeat (10) @(posedge clk160);
    first = -1;
    for (int i = 0; i + seq.size() <= u_rx.raw.size(); i++) begin
      bit same;
      same = 1;
      foreach (seq[j]) if (u_rx.raw[i + j] !== seq[j]) same = 0;
      if (same) begin first = i; break; end
    end
    check(first >= 0, "sent sequence found in the received bytes");
    if (first >= 0)
      for (int j = 0; j < seq.size(); j++) check(u_rx.raw[first + j] == seq[j], $sformatf("byte %0d", j));
    for (int i = 0; i < first; i++) check(u_rx.raw[i] == 8'h00, "idle before the sequence");
    // rate: bytes in 1 us
    nb0 = u_rx.n_bytes;
    t0 = $realtime;
    #1000000;
    check(u_rx.n_bytes - nb0 == 160 || u_rx.n_bytes - nb0 == 161,
          $sformatf("%0d bytes per us (1280 Mb/s is 160)", u_rx.n_bytes - nb0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
