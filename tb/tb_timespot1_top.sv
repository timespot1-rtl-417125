// tb_timespot1_top: end-to-end test of the chip with fewer pixels per group
// (4 groups of 32, 128 pixels; everything else at its default).  The
// testbench drives the 640 MHz clock, the timestamp start, the I2C bus (bus
// master model) and the discriminator outputs, and decodes the eight serial
// links (link receiver models).  Each mechanism below is counted and the
// test fails if one of them never happened:
//   reg      slow-control write / read back, DAC codes on their port
//   cal      calibration of all pixels from one command, done within 4 us
//   ts       timestamp start; the timestamp in each word is the hit's
//            reference-cycle timestamp plus a fixed latency
//   hit      AFE hits on random pixels: pixel address, link, TA and ToT
//   debug    debug mode: the word carries the two Vernier counters
//   tdc_tp   self test pulse into the TDC at a programmed phase and width
//   afe_tp   test pulse sent to the AFE of an enabled pixel only
//   disable  a disabled pixel sends nothing; AFE power bit reaches its port
//   header   new header and idle bytes used on the links
//   stall    overloaded group: FIFOs full, tree stalls
//   lost     overloaded group: hits lost in full caches, and every hit
//            either arrives or is counted lost
module tb_timespot1_top;
  import ts1_pkg::*;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int NG = 4, NPG = 32, NP = NG * NPG;

  logic clk640 = 0, rst_n = 1, ts_start = 0;
  logic scl, sda_low, sda_oe, sda;
  logic [NP-1:0] afe_hit = '0, afe_tp, afe_en_tp, afe_pwr_on, cal_done;
  logic [7:0][7:0] dac_code;
  logic [2*NG-1:0] lvds_dout;
  logic [NG-1:0][15:0] lost_cnt, stall_cnt;
  int checks = 0, failures = 0;

  always #781.25 clk640 = ~clk640;
  assign sda = ~(sda_low | sda_oe);

  timespot1_top #(.N_PIX_GROUP(NPG)) dut (
    .clk640, .rst_n, .ts_start, .scl, .sda_in(sda), .sda_oe, .afe_hit, .afe_tp,
    .afe_en_tp, .afe_pwr_on, .dac_code, .lvds_dout, .cal_done, .lost_cnt, .stall_cnt);

  i2c_master_model #(.QUARTER_PS(150000)) u_m (.scl, .sda_low, .sda);

  for (genvar l = 0; l < 2 * NG; l++) begin : g_rx
    link_rx_model u_rx (.clk640, .ph640(dut.ph640), .dout(lvds_dout[l]),
                        .header(dut.header), .idle(dut.idle));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  // ---- mechanisms
  typedef enum int {M_REG, M_CAL, M_TS, M_HIT, M_DEBUG, M_TDC_TP, M_AFE_TP, M_DISABLE,
                    M_HEADER, M_STALL, M_LOST, M_N} mech_t;
  int mech [M_N];
  string mech_name [M_N] = '{"reg", "cal", "ts", "hit", "debug", "tdc_tp", "afe_tp",
                              "disable", "header", "stall", "lost"};

  // ---- words received, per pixel (global index), with the link they came on
  typedef struct { logic [39:0] w; int link; } rx_t;
  rx_t got [NP][$];
  int n_got = 0;
  for (genvar l = 0; l < 2 * NG; l++) begin : g_drain
    always @(posedge dut.clk160) begin
      while (g_rx[l].u_rx.words.size() != 0) begin
        rx_t r;
        int p;
        r.w = g_rx[l].u_rx.words.pop_front();
        r.link = l;
        p = (l / 2) * NPG + int'(r.w[39:32]);
        if (r.w[39:32] < NPG) got[p].push_back(r);
        else check(0, "address inside the group");
        n_got++;
      end
    end
  end

  // timestamp at the reference clk40 edge
  realtime t40;
  always @(posedge dut.clk40) t40 = $realtime;

  // Hit on pixel p with true TA ta_ps (to the next clk40 rising edge after
  // the call's first clk40 edge) and width w_ps; returns the timestamp that
  // the chip's counter shows during the reference cycle.
  task automatic hit(input int p, input int ta_ps, input int w_ps, output logic [TS_W-1:0] ts_ref);
    realtime t_ref;
    logic [TS_W-1:0] t;
    @(posedge dut.clk40);
    t_ref = $realtime + 25000.0;
    #(t_ref - real'(ta_ps) - $realtime);
    afe_hit[p] = 1'b1;
    if (w_ps < ta_ps + 100) begin
      #(real'(w_ps));
      afe_hit[p] = 1'b0;
      #(t_ref + 100.0 - $realtime);
      t = dut.ts;                     // value after the reference edge
    end else begin
      #(t_ref + 100.0 - $realtime);
      t = dut.ts;
      #(t_ref - real'(ta_ps) + real'(w_ps) - $realtime);
      afe_hit[p] = 1'b0;
    end
    ts_ref = t;
  endtask

  // pop the single word expected from pixel p
  task automatic get_word(input int p, output logic [39:0] w, output bit ok);
    ok = 0;
    w = '0;
    for (int i = 0; i < 400 && got[p].size() == 0; i++) @(posedge dut.clk160);
    if (got[p].size() != 0) begin
      rx_t r;
      r = got[p].pop_front();
      w = r.w;
      ok = 1;
      check(r.link / 2 == p / NPG, "word on a link of the pixel's group");
    end
  endtask

  function automatic bit near(input int a, input int b, input int tol);
    return (a - b <= tol) && (b - a <= tol);
  endfunction

  int ts_lat = -1;

  task automatic check_hit(input int p, input int ta, input int w, input logic [TS_W-1:0] ts_ref);
    logic [39:0] x;
    bit ok;
    int d;
    get_word(p, x, ok);
    check(ok, $sformatf("word from pixel %0d", p));
    if (!ok) return;

    check(near(int'(x[31:17]), ta, 150), $sformatf("pixel %0d TA %0d true %0d", p, x[31:17], ta));
    check(near(int'(x[16:9]) * 1070, w, 1070 + w / 30), $sformatf("pixel %0d ToT %0d width %0d", p, x[16:9], w));
    d = int'(TS_W'(x[8:0] - ts_ref));
    if (ts_lat < 0) ts_lat = d;
    check(d == ts_lat && (d == 12 || d == 13), $sformatf("timestamp latency %0d clk40 cycles", d));
    mech[M_HIT]++;
    if (d == ts_lat) mech[M_TS]++;
  endtask

  task automatic pix_cfg(input int p, input logic [7:0] v);
    u_m.write1(16'h1000 + 16'(p), v);
  endtask

  initial begin
    logic [7:0] rd [], d8 [];
    logic [TS_W-1:0] tsr [NP];
    int tas [NP], ws [NP];
    realtime t_cal;
    int n_tp, sent3, got3;

    #1 rst_n = 0;
    #50000 rst_n = 1;
    #2000000;
    check(g_rx[0].u_rx.n_idle > 100 && g_rx[7].u_rx.n_idle > 100 && g_rx[3].u_rx.n_header == 0,
          $sformatf("idle links: %0d %0d idle, %0d words", g_rx[0].u_rx.n_idle, g_rx[7].u_rx.n_idle, n_got));

    // reg
    u_m.read(16'h0000, 2, rd);
    check(rd[0] == 8'hB5 && rd[1] == 8'h3C, "header and idle bytes at reset");
    d8 = new[8];
    foreach (d8[i]) d8[i] = 8'($urandom);
    u_m.write(16'h0010, d8, 8);
    begin
      bit same;
      same = 1;
      foreach (d8[i]) if (dac_code[i] != d8[i]) same = 0;
      check(same, "DAC codes written in one burst");
      u_m.read(16'h0010, 8, rd);
      foreach (d8[i]) if (rd[i] != d8[i]) same = 0;
      check(same, "DAC codes read back");
      if (same) mech[M_REG]++;
    end

    // ts
    @(negedge dut.clk40) ts_start = 1'b1;
    @(negedge dut.clk40) ts_start = 1'b0;
    check(dut.ts == 9'd0 || dut.ts == 9'd1, "timestamp restarted");

    // cal
    fork
      u_m.write1(16'h0002, 8'h01);
      begin @(posedge dut.cal_start); t_cal = $realtime; end
    join
    wait (&cal_done);

    check(&cal_done, "all pixels calibrated");
    check($realtime - t_cal < 4.0e6, $sformatf("calibration took %0.2f us", ($realtime - t_cal) / 1.0e6));
    if (&cal_done) mech[M_CAL]++;

    // hit: bunches of 8 pixels in the same clk40 period
    for (int b = 0; b < 10; b++) begin
      int ps [8];
      for (int i = 0; i < 8; i++) begin
        ps[i] = (i * NP / 8) + int'($urandom_range(NP / 8 - 1));
        tas[ps[i]] = int'($urandom_range(200, 24800));
        ws[ps[i]]  = int'($urandom_range(3000, 150000));
      end
      for (int i = 0; i < 8; i++) begin
        automatic int pp = ps[i];
        fork hit(pp, tas[pp], ws[pp], tsr[pp]); join_none
      end
      wait fork;
      for (int i = 0; i < 8; i++) check_hit(ps[i], tas[ps[i]], ws[ps[i]], tsr[ps[i]]);
    end

    // debug on pixel 5
    pix_cfg(5, 8'h13);
    for (int k = 0; k < 4; k++) begin
      logic [39:0] x;
      bit ok;
      int t0, t1, f;
      t0 = int'(dut.g_pix[5].u_pix.t0_ps);
      t1 = int'(dut.g_pix[5].u_pix.t1_ps);
      tas[5] = int'($urandom_range(200, 24800));
      hit(5, tas[5], 20000, tsr[5]);
      get_word(5, x, ok);
      f = (int'(x[31:25]) - 1) * t0 - (int'(x[24:17]) - 1) * t1;
      check(ok && near(f, tas[5], 150), $sformatf("debug counters give %0d, true %0d", f, tas[5]));
      if (ok && near(f, tas[5], 150)) mech[M_DEBUG]++;
    end
    pix_cfg(5, 8'h11);

    // tdc_tp on pixels 32..35, phase 3, width 8 x 6.25 ns
    d8 = new[4];
    foreach (d8[i]) d8[i] = 8'h15;
    u_m.write(16'h1000 + 16'd32, d8, 4);
    d8 = new[2];
    d8[0] = 8'd3; d8[1] = 8'd7;
    u_m.write(16'h0004, d8, 2);
    n_tp = n_got;
    u_m.write1(16'h0002, 8'h02);
    repeat (200) @(posedge dut.clk160);
    check(n_got - n_tp == 4, $sformatf("%0d words after the test pulse (4 pixels enabled)", n_got - n_tp));
    for (int p = 32; p < 36; p++) begin
      logic [39:0] x;
      bit ok;
      get_word(p, x, ok);
      check(ok && near(int'(x[31:17]), 25000 - 3 * 3125, 150), $sformatf("TP3 TA %0d", x[31:17]));
      check(ok && near(int'(x[16:9]) * 1070, 8 * 6250, 1500), $sformatf("TP ToT %0d", x[16:9]));
      if (ok && near(int'(x[31:17]), 25000 - 3 * 3125, 150)) mech[M_TDC_TP]++;
    end
    d8 = new[4];
    foreach (d8[i]) d8[i] = 8'h11;
    u_m.write(16'h1000 + 16'd32, d8, 4);

    // afe_tp on pixel 40
    pix_cfg(40, 8'h19);
    check(afe_en_tp[40] && !afe_en_tp[41], "AFE test-pulse enable of pixel 40 only");
    begin
      realtime tr, tf;
      int others;
      others = 0;
      fork
        u_m.write1(16'h0002, 8'h02);
        begin
          @(posedge afe_tp[40]); tr = $realtime;
          @(negedge afe_tp[40]); tf = $realtime;
        end
        begin
          repeat (4000) @(posedge dut.clk160) if ((afe_tp & ~(NP'(1) << 40)) != '0) others++;
        end
      join_any
      disable fork;
      check(near(int'(tf - tr), 50000, 100), $sformatf("AFE test pulse %0.0f ps wide", tf - tr));
      check(others == 0, "no test pulse to other AFEs");
      if (near(int'(tf - tr), 50000, 100) && others == 0) mech[M_AFE_TP]++;
    end
    repeat (100) @(posedge dut.clk160);
    check(got[40].size() == 0, "AFE test pulse alone gives no TDC word (AFE not modelled)");
    pix_cfg(40, 8'h11);

    // disable pixel 50
    pix_cfg(50, 8'h00);
    check(!afe_pwr_on[50] && afe_pwr_on[49], "AFE power bit");
    n_tp = n_got;
    hit(50, 10000, 10000, tsr[50]);
    repeat (300) @(posedge dut.clk160);
    check(n_got == n_tp, "disabled pixel sends nothing");
    if (n_got == n_tp && !afe_pwr_on[50]) mech[M_DISABLE]++;
    pix_cfg(50, 8'h11);

    // header / idle
    begin
      int h0, i0;
      logic [7:0] hb [];
      hb = new[2];
      hb[0] = 8'hD2; hb[1] = 8'h4B;
      u_m.write(16'h0000, hb, 2);
      repeat (10) @(posedge dut.clk160);
      h0 = g_rx[2].u_rx.n_header;
      i0 = g_rx[2].u_rx.n_idle;
      hit(33, 7000, 9000, tsr[33]);
      check_hit(33, 7000, 9000, tsr[33]);
      check(g_rx[2].u_rx.n_header + g_rx[3].u_rx.n_header > h0, "word framed by the new header");
      check(g_rx[2].u_rx.n_idle > i0 + 20, "new idle byte on the link");
      if (g_rx[2].u_rx.n_header + g_rx[3].u_rx.n_header > h0) mech[M_HEADER]++;
    end

    // overload group 3: every pixel at ~2.9 MHz for 10 us
    sent3 = 0;
    for (int p = 3 * NPG; p < NP; p++) got[p].delete();
    got3 = n_got;
    for (int p = 3 * NPG; p < NP; p++) begin
      automatic int pp = p;
      fork
        for (int k = 0; k < 30; k++) begin
          #(real'($urandom_range(330000, 360000)));
          afe_hit[pp] = 1'b1; #20000; afe_hit[pp] = 1'b0;
        end
      join_none
    end
    wait fork;
    repeat (3000) @(posedge dut.clk160);
    got3 = 0;
    for (int p = 3 * NPG; p < NP; p++) got3 += got[p].size();
    check(stall_cnt[3] > 0 && stall_cnt[0] == 0, $sformatf("group 3 stalled %0d cycles", stall_cnt[3]));
    check(lost_cnt[3] > 0 && lost_cnt[0] == 0, $sformatf("group 3 lost %0d hits", lost_cnt[3]));
    check(got3 + int'(lost_cnt[3]) == 30 * NPG,
          $sformatf("group 3: %0d received + %0d lost = %0d sent", got3, lost_cnt[3], 30 * NPG));
    if (stall_cnt[3] > 0) mech[M_STALL]++;
    if (lost_cnt[3] > 0 && got3 + int'(lost_cnt[3]) == 30 * NPG) mech[M_LOST]++;

    check(u_m.n_nack == 0, "all I2C bytes acknowledged");
    for (int m = 0; m < M_N; m++) begin
      $display("mechanism %-8s seen %0d times", mech_name[m], mech[m]);
      check(mech[m] > 0, $sformatf("mechanism %s happened", mech_name[m]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #3ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
