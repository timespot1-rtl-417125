// tb_tx_protocol: the link protocol in front of a queue that plays the FIFO
// (first-word fall-through).  Every word must leave as the header byte and
// five data bytes, most significant first, in exactly six clk160 cycles;
// with no word waiting the idle byte is sent.  Header and idle bytes are
// changed half way to check that they are taken from the inputs.
module tb_tx_protocol;
  import ts1_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  logic clk160 = 0, rst_n = 1;
  logic [7:0] header = 8'hB5, idle = 8'h3C;
  logic fifo_empty, fifo_rd, tx_is_header;
  logic [HIT_W-1:0] fifo_data;
  logic [7:0] tx_byte;
  int checks = 0, failures = 0;
  logic [HIT_W-1:0] q [$], sent [$];

  always #3125 clk160 = ~clk160;
  tx_protocol dut (.*);

  assign fifo_empty = (q.size() == 0);
  assign fifo_data  = fifo_empty ? '0 : q[0];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  // Receiver of the byte stream.
  int left = 0, n_idle = 0, n_hdr = 0;
  logic [HIT_W-1:0] w;
  int t_hdr;
  int cyc = 0;
  always @(posedge clk160) begin
    cyc++;
    if (rst_n) begin
      #1;
      if (left != 0) begin
        w = {w[31:0], tx_byte};
        left--;
        if (left == 0) begin
          check(sent.size() != 0 && w == sent[0], "data bytes");
          if (sent.size() != 0) void'(sent.pop_front());
          check(cyc - t_hdr == 5, "six cycles per word");
        end
      end else if (tx_byte == header && tx_is_header) begin
        n_hdr++; left = 5; t_hdr = cyc;
      end else begin
        check(tx_byte == idle && !tx_is_header, "idle byte between words");
        n_idle++;
      end
    end
  end

  always @(posedge clk160) begin
    if (fifo_rd) begin
      check(!fifo_empty, "no read of an empty FIFO");
      sent.push_back(q.pop_front());
    end
  end

  initial begin
    int n0;
    #1 rst_n = 0;
    #10000 rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk160);
      if (i == 200) begin header = 8'hE7; idle = 8'h81; end
      if ((i % 100) < 60 && $urandom_range(9) < 1) q.push_back({8'($urandom), 32'($urandom)});
    end
    wait (q.size() == 0 && sent.size() == 0);
    repeat (10) @(posedge clk160);
    check(n_hdr > 15, $sformatf("%0d words sent", n_hdr));
    check(n_idle > 40, "idle bytes sent");
    // back-to-back words: 20 words in 120 cycles
    for (int i = 0; i < 20; i++) q.push_back({8'(i), 32'($urandom)});
    n0 = n_hdr;
    repeat (121) @(posedge clk160);
    #2;
    check(n_hdr - n0 == 20 && q.size() == 0, $sformatf("burst: %0d words in 120 cycles", n_hdr - n0));
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
