// tb_timespot1_full: the chip at its full size and default parameters
// (1024 pixels, 4 readout trees, 8 links).  Checks: slow-control read of
// the header byte, calibration of all 1024 pixels from one command within
// 4 us, then one hit in every pixel in the same 25 ns reference cycle (TA
// set by pixel number); every pixel's word must arrive once, on a link of
// its group, with its address and its TA within 150 ps; the 256 words of
// each group leave its two links in about 256 x 6 / 2 clk160 cycles (4.8 us,
// the 1.28 Gb/s link rate), with no hit lost and no stall.
module tb_timespot1_full;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int NP = 1024;
  logic clk640 = 0, rst_n = 1, ts_start = 0;
  logic scl, sda_low, sda_oe, sda;
  logic [NP-1:0] afe_hit = '0, afe_tp, afe_en_tp, afe_pwr_on, cal_done;
  logic [7:0][7:0] dac_code;
  logic [7:0] lvds_dout;
  logic [3:0][15:0] lost_cnt, stall_cnt;
  int checks = 0, failures = 0;

  always #781.25 clk640 = ~clk640;
  assign sda = ~(sda_low | sda_oe);

  timespot1_top dut (.clk640, .rst_n, .ts_start, .scl, .sda_in(sda), .sda_oe, .afe_hit,
                     .afe_tp, .afe_en_tp, .afe_pwr_on, .dac_code, .lvds_dout, .cal_done,
                     .lost_cnt, .stall_cnt);
  i2c_master_model #(.QUARTER_PS(150000)) u_m (.scl, .sda_low, .sda);
  for (genvar l = 0; l < 8; l++) begin : g_rx
    link_rx_model u_rx (.clk640, .ph640(dut.ph640), .dout(lvds_dout[l]),
                        .header(dut.header), .idle(dut.idle));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  int n_word [NP];
  int n_bad = 0, n_got = 0;
  realtime t_last;
  function automatic int ta_of(input int p);
    return 300 + (p * 23) % 24400;
  endfunction
  for (genvar l = 0; l < 8; l++) begin : g_drain
    always @(posedge dut.clk160) begin
      while (g_rx[l].u_rx.words.size() != 0) begin
        logic [39:0] w;
        int p, ta;
        w = g_rx[l].u_rx.words.pop_front();
        p = (l / 2) * 256 + int'(w[39:32]);
        ta = int'(w[31:17]);
        n_word[p]++;
        n_got++;
        t_last = $realtime;
        if (ta - ta_of(p) > 150 || ta_of(p) - ta > 150) begin
          n_bad++;
          if (n_bad < 10) $display("pixel %0d TA %0d expected %0d", p, ta, ta_of(p));
        end
      end
    end
  end

  initial begin
    logic [7:0] rd [];
    realtime t_cal, t_ref;
    #1 rst_n = 0;
    #50000 rst_n = 1;
    #500000;
    u_m.read(16'h0000, 1, rd);
    check(rd[0] == 8'hB5, "header byte read over the bus");
    fork
      u_m.write1(16'h0002, 8'h01);
      begin @(posedge dut.cal_start); t_cal = $realtime; end
    join
    wait (&cal_done);
    check($realtime - t_cal < 4.0e6, $sformatf("1024 pixels calibrated in %0.2f us", ($realtime - t_cal) / 1.0e6));
    @(posedge dut.clk40);
    t_ref = $realtime + 25000.0;
    for (int p = 0; p < NP; p++) begin
      automatic int pp = p;
      fork begin
        #(t_ref - real'(ta_of(pp)) - $realtime);
        afe_hit[pp] = 1'b1;
        #20000;
        afe_hit[pp] = 1'b0;
      end join_none
    end
    wait fork;
    #10us;
    begin
      int once;
      once = 0;
      for (int p = 0; p < NP; p++) if (n_word[p] == 1) once++;
      check(once == NP, $sformatf("%0d of %0d pixels sent exactly one word", once, NP));
    end
    check(n_bad == 0, $sformatf("%0d words with a wrong TA", n_bad));
    check(lost_cnt == '0 && stall_cnt == '0, "no hit lost, no stall");
    // 256 words per group over 2 links: 768 clk160 cycles after the first word
    check(t_last - t_ref > 4.6e6 && t_last - t_ref < 5.5e6,
          $sformatf("last word %0.2f us after the hits (4.8 us of link time + latency)", (t_last - t_ref) / 1.0e6));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #400us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
