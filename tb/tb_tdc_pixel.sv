// tb_tdc_pixel: one complete pixel TDC (behavioural DCOs with mismatch) at
// its default latency.  Sequence: reset, calibration, then
//  1. AFE hits at random phases and widths: the 24-bit frame must give TA
//     within 150 ps of the true hit-to-reference time and ToT within one
//     count of width / T0; DV must rise a fixed 50 clk160 cycles after the
//     reference edge that follows the hit;
//  2. debug mode: the counters of the frame must satisfy the Vernier formula
//     with the true DCO periods;
//  3. self test pulses TP1..TP7: TA = 25 ns - k * 3.125 ns;
//  4. dead time: a hit 150 ns after another is not measured, and a train
//     of hits every 340 ns (2.9 MHz) is measured completely;
//  5. a disabled pixel sends nothing.
module tb_tdc_pixel;
  import ts1_pkg::*;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int OFF0 = -4, OFF1 = 0;

  logic clk640 = 0, rst_n = 1, clk160, clk40;
  logic [1:0] ph640, ph160;
  pix_cfg_t cfg;
  logic hit_afe = 0, cal_start = 0, tp_fire = 0;
  logic [2:0] tp_phase = 1;
  logic [4:0] tp_width = 0;
  logic afe_tp, ser, dv, cal_done, busy;
  int checks = 0, failures = 0;

  always #781.25 clk640 = ~clk640;
  clock_div u_clk (.*);

  tdc_pixel #(.DCO0_OFFSET_PS(OFF0), .DCO1_OFFSET_PS(OFF1)) dut (
    .clk160, .clk40, .rst_n, .ph160, .cfg, .hit_afe, .cal_start,
    .res_target_ps(8'd50), .tp_fire, .tp_phase, .tp_width,
    .afe_tp, .ser, .dv, .cal_done, .busy);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  function automatic int period(input int f, input int c, input int off);
    int h = 10 + off + c * 60;
    for (int i = 0; i < 4; i++) begin
      int lvl = f / 4 + ((i < f % 4) ? 1 : 0);
      if (lvl > 2) lvl = 2;
      h += 100 - 6 * lvl;
    end
    return 2 * h;
  endfunction

  // Frame capture.
  logic [23:0] fr, frame;
  int nframes = 0, nbits = 0;
  realtime t_dv;
  always @(posedge clk160) begin
    if (dv) begin
      if (nbits == 0) t_dv = $realtime;
      fr = {fr[22:0], ser};
      nbits++;
    end else if (nbits != 0) begin
      check(nbits == 24, "24-bit frame");
      frame = fr;
      nframes++;
      nbits = 0;
    end
  end

  realtime t40;
  always @(posedge clk40) t40 = $realtime;

  // Send a hit whose true TA (time to the next clk40 rising edge) is ta_ps.
  task automatic send_hit(input int ta_ps, input int width_ps);
    realtime t_ref;
    @(posedge clk40);
    t_ref = $realtime + 25000.0;
    #(t_ref - real'(ta_ps) - $realtime);
    hit_afe = 1;
    #(real'(width_ps));
    hit_afe = 0;
  endtask

  int T0, T1;

  initial begin
    cfg = '{afe_pwr_on: 1'b1, afe_tp_en: 1'b0, tdc_tp_en: 1'b0, debug: 1'b0, enable: 1'b1};
    #1 rst_n = 0;
    #20000 rst_n = 1;
    repeat (4) @(posedge clk160);
    check(nframes == 0, "no frame after reset");
    cal_start <= 1; @(posedge clk160); cal_start <= 0;
    wait (cal_done);
    T0 = period(int'(dut.fine_code0), int'(dut.coarse0), OFF0);
    T1 = period(int'(dut.fine_code1), int'(dut.coarse1), OFF1);
    $display("calibrated: T0 %0d (stored %0d) T1 %0d (stored %0d)", T0, dut.t0_ps, T1, dut.t1_ps);
    check(T0 - T1 >= 40 && T0 - T1 <= 70, "resolution near 50 ps");

    // 1. random hits
    for (int i = 0; i < 40; i++) begin
      int ta, w, n0, tot_exp, ta_m, tot_m;
      realtime t_ref;
      ta = int'($urandom_range(100, 24900));
      w  = int'($urandom_range(4000, 180000));
      n0 = nframes;
      fork send_hit(ta, w); join_none
      @(posedge clk40); t_ref = $realtime + 25000.0;
      wait (nframes == n0 + 1);
      ta_m  = int'(frame[22:8]);
      tot_m = int'(frame[7:0]);
      tot_exp = w / T0;
      check(frame[23] == 1'b0, "normal frame MSB");
      check(ta_m - ta <= 150 && ta - ta_m <= 150, $sformatf("hit %0d TA %0d true %0d", i, ta_m, ta));
      check(tot_m == tot_exp || tot_m == tot_exp + 1, $sformatf("ToT %0d exp %0d", tot_m, tot_exp));
      check(t_dv - t_ref == 50 * 6250.0, $sformatf("fixed latency %0.0f ps", t_dv - t_ref));
      repeat (20) @(posedge clk160);
    end

    // 2. debug mode
    cfg.debug = 1'b1;
    for (int i = 0; i < 10; i++) begin
      int ta, n0, x;
      ta = int'($urandom_range(100, 24900));
      n0 = nframes;
      send_hit(ta, 20000);
      wait (nframes == n0 + 1);
      x = (int'(frame[23:16]) - 1) * T0 - (int'(frame[15:8]) - 1) * T1;
      check(ta - x >= 0 && ta - x < T0 - T1 + 2, $sformatf("debug counters: formula %0d true %0d", x, ta));
      repeat (20) @(posedge clk160);
    end
    cfg.debug = 1'b0;

    // 3. self test pulses
    cfg.tdc_tp_en = 1'b1;
    for (int k = 1; k <= 7; k++) begin
      int n0, ta_m, exp_ta;
      tp_phase = 3'(k);
      tp_width = 5'(k * 4);
      n0 = nframes;
      @(posedge clk160) tp_fire <= 1; @(posedge clk160) tp_fire <= 0;
      wait (nframes == n0 + 1);
      ta_m = int'(frame[22:8]);
      exp_ta = 25000 - 3125 * k;
      check(ta_m - exp_ta <= 150 && exp_ta - ta_m <= 150, $sformatf("TP%0d TA %0d exp %0d", k, ta_m, exp_ta));
      check(int'(frame[7:0]) - (6250 * (k * 4 + 1)) / T0 <= 1 && int'(frame[7:0]) >= (6250 * (k * 4 + 1)) / T0,
            $sformatf("TP%0d ToT %0d", k, frame[7:0]));
      repeat (20) @(posedge clk160);
    end
    cfg.tdc_tp_en = 1'b0;

    // 4. dead time and 3 MHz train
    begin
      int n0;
      n0 = nframes;
      send_hit(5000, 5000);
      #150000;
      hit_afe = 1; #5000; hit_afe = 0;      // inside the dead time
      repeat (200) @(posedge clk160);
      check(nframes == n0 + 1, "hit in dead time not measured");
      n0 = nframes;
      for (int i = 0; i < 20; i++) begin
        hit_afe = 1; #10000; hit_afe = 0; #330000;
      end
      repeat (200) @(posedge clk160);
      check(nframes == n0 + 20, $sformatf("2.9 MHz train: %0d of 20", nframes - n0));
    end

    // 5. disabled pixel
    begin
      int n0;
      cfg.enable = 1'b0;
      n0 = nframes;
      send_hit(10000, 10000);
      repeat (200) @(posedge clk160);
      check(nframes == n0, "disabled pixel is silent");
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
