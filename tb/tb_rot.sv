// tb_rot: one readout tree at its default size (256 pixels, two FIFOs of 32
// words, two links) with the pixels played by the testbench, which sends
// 24-bit frames on each pixel's ser/dv lines.  Both serial links are decoded
// by link receiver models.
//  1. Moderate random load (about 20 M hits/s for the group): every frame
//     must arrive once, on one of the two links, as a 40-bit word carrying
//     its pixel address, the 23 TDC bits and the timestamp seen at DV.
//  2. Overload (every pixel fires every 60 cycles): both FIFOs fill, the
//     tree stalls, caches overflow and frames are counted as lost; the
//     links must then run at their full rate of one word per 6 bytes, 2 x
//     26.7 M words/s, and every frame must either arrive or be counted lost.
//  3. Header and idle bytes come from the inputs.
module tb_rot;
  import ts1_pkg::*;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int N_PIX = 256;
  logic clk640 = 0, rst_n = 1, clk160, clk40;
  logic [1:0] ph640, ph160;
  logic [TS_W-1:0] ts = '0;
  logic [N_PIX-1:0] pix_ser = '0, pix_dv = '0;
  logic [7:0] header = 8'hB5, idle = 8'h3C;
  logic [1:0] dout, fifo_full;
  logic [15:0] lost_cnt, stall_cnt;
  int checks = 0, failures = 0;

  always #781.25 clk640 = ~clk640;
  clock_div u_clk (.*);
  always @(posedge clk40) ts <= ts + 1'b1;

  rot dut (.clk160, .clk640, .rst_n, .ph640, .ts, .pix_ser, .pix_dv, .header, .idle,
           .dout, .lost_cnt, .stall_cnt, .fifo_full);
  link_rx_model u_rx0 (.clk640, .ph640, .dout(dout[0]), .header, .idle);
  link_rx_model u_rx1 (.clk640, .ph640, .dout(dout[1]), .header, .idle);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  int expected [logic [39:0]];
  int n_sent = 0, n_got = 0, n_full_seen = 0;
  always @(posedge clk160) if (fifo_full == 2'b11) n_full_seen++;

  task automatic send(input int p, input logic [23:0] f);
    logic [39:0] key;
    @(negedge clk160);
    key = {8'(p), f[22:0], ts};
    if (expected.exists(key)) expected[key]++; else expected[key] = 1;
    n_sent++;
    for (int i = 23; i >= 0; i--) begin
      pix_dv[p] = 1'b1; pix_ser[p] = f[i];
      @(negedge clk160);
    end
    pix_dv[p] = 1'b0; pix_ser[p] = 1'b0;
  endtask

  task automatic drain_rx();
    while (u_rx0.words.size() != 0 || u_rx1.words.size() != 0) begin
      logic [39:0] w;
      w = (u_rx0.words.size() != 0) ? u_rx0.words.pop_front() : u_rx1.words.pop_front();
      n_got++;
      check(expected.exists(w) && expected[w] > 0, $sformatf("received word %h was sent", w));
      if (expected.exists(w)) begin
        expected[w]--;
        if (expected[w] == 0) expected.delete(w);
      end
    end
  endtask

  always @(posedge clk160) drain_rx();

  // pixel p fires n times, gap cycles apart on average
  task automatic pixel_proc(input int p, input int n, input int gap_min, input int gap_max);
    for (int k = 0; k < n; k++) begin
      repeat ($urandom_range(gap_max, gap_min)) @(negedge clk160);
      send(p, 24'($urandom));
    end
  endtask

  initial begin
    int w0, w1, b0, g0, j0;
    #1 rst_n = 0;
    #20000 rst_n = 1;
    repeat (50) @(posedge clk160);
    check(u_rx0.n_idle > 20 && u_rx1.n_idle > 20 && u_rx0.n_header == 0, "idle bytes on empty links");

    // 1. moderate load: 256 pixels x 6 hits in ~75 us -> ~20 M hits/s
    for (int p = 0; p < N_PIX; p++) begin
      automatic int pp = p;
      fork pixel_proc(pp, 6, 200, 3400); join_none
    end
    wait fork;
    repeat (400) @(posedge clk160);
    check(n_got == n_sent && expected.size() == 0, $sformatf("moderate load: %0d of %0d frames", n_got, n_sent));
    check(lost_cnt == 0 && stall_cnt == 0, "no loss and no stall at moderate load");
    check(u_rx0.n_header > 100 && u_rx1.n_header > 100, "both links carry words");
    check(u_rx0.n_junk == 0 && u_rx1.n_junk == 0, "only header and idle between words");

    // 3. new header / idle bytes
    header = 8'hC3; idle = 8'h5A;
    repeat (4) @(posedge clk160);        // bytes already in the serializers
    b0 = u_rx0.n_idle;
    repeat (100) @(posedge clk160);
    check(u_rx0.n_idle - b0 > 90, "new idle byte");
    fork send(7, 24'h123456); join
    repeat (40) @(posedge clk160);
    check(n_got == n_sent, "word with the new header");

    // 2. overload
    g0 = n_got;
    j0 = u_rx0.n_junk + u_rx1.n_junk;
    for (int p = 0; p < N_PIX; p++) begin
      automatic int pp = p;
      fork pixel_proc(pp, 8, 40, 80); join_none
    end
    repeat (600) @(posedge clk160);
    w0 = u_rx0.words.size() + n_got;
    #10us;
    w1 = n_got;
    check(w1 - w0 >= 525 && w1 - w0 <= 545,
          $sformatf("full link rate: %0d words in 10 us (2 links x 160 MB/s / 6 B = 533)", w1 - w0));
    wait fork;
    wait (fifo_full == 2'b00);
    repeat (2000) @(posedge clk160);
    check(n_full_seen > 0, "both FIFOs were full");
    check(stall_cnt > 0, $sformatf("tree stalled (%0d cycles)", stall_cnt));
    check(lost_cnt > 0, $sformatf("frames lost in full caches (%0d)", lost_cnt));
    check(n_got + int'(lost_cnt) == n_sent,
          $sformatf("received %0d + lost %0d = sent %0d", n_got, lost_cnt, n_sent));
    check(expected.size() == int'(lost_cnt), "the missing frames are the lost ones");
    check(u_rx0.n_junk + u_rx1.n_junk == j0, "framing kept under overload");
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
