// tb_rot_pixel_cache: the two-entry cache of one pixel in the readout tree.
// Frames of 24 bits are sent on ser/dv as the pixel TDC does (MSB first,
// 24 clk160 cycles); the cache must store the low 23 bits with the
// timestamp seen when DV rose, fill cache 0 then cache 1, report a third
// frame as lost when both are full, and accept frames again once read.
module tb_rot_pixel_cache;
  import ts1_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  logic clk160 = 0, rst_n = 1, ser = 0, dv = 0, lost;
  logic [TS_W-1:0] ts = '0;
  logic [1:0] rd = '0, valid;
  tdc_ts_t data [2];
  int checks = 0, failures = 0, n_lost = 0;

  always #3125 clk160 = ~clk160;
  always @(posedge clk160) ts <= ts + 1'b1;
  always @(negedge clk160) if (lost) n_lost++;
  rot_pixel_cache dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  task automatic send(input logic [23:0] f, output logic [TS_W-1:0] ts_at_dv);
    @(negedge clk160);
    ts_at_dv = ts;
    for (int i = 23; i >= 0; i--) begin
      dv = 1; ser = f[i];
      @(negedge clk160);
    end
    dv = 0; ser = 0;
    @(negedge clk160);
    #100;
  endtask

  initial begin
    logic [23:0] f [3];
    logic [TS_W-1:0] t [3];
    #1 rst_n = 0;
    #10000 rst_n = 1;
    check(valid == 2'b00, "empty after reset");
    for (int r = 0; r < 30; r++) begin
      int nl;
      for (int k = 0; k < 3; k++) f[k] = 24'($urandom);
      nl = n_lost;
      send(f[0], t[0]);
      check(valid == 2'b01, "first frame in cache 0");
      check(data[0] == tdc_ts_t'({f[0][22:0], t[0]}), "cache 0 word and timestamp");
      send(f[1], t[1]);
      check(valid == 2'b11, "second frame in cache 1");
      check(data[1] == tdc_ts_t'({f[1][22:0], t[1]}), "cache 1 word and timestamp");
      send(f[2], t[2]);
      check(valid == 2'b11 && n_lost == nl + 1, "third frame lost");
      check(data[0] == tdc_ts_t'({f[0][22:0], t[0]}) && data[1] == tdc_ts_t'({f[1][22:0], t[1]}),
            "caches kept after a lost frame");
      // read the caches, in random order
      if (r % 2 == 0) begin
        rd = 2'b01; @(negedge clk160); rd = 2'b00;
        check(valid == 2'b10, "cache 0 freed");
        send(f[2], t[2]);
        check(valid == 2'b11 && data[0] == tdc_ts_t'({f[2][22:0], t[2]}), "refill of cache 0");
        rd = 2'b11; @(negedge clk160); rd = 2'b00;
      end else begin
        rd = 2'b10; @(negedge clk160); rd = 2'b00;
        check(valid == 2'b01, "cache 1 freed");
        send(f[2], t[2]);
        check(valid == 2'b11 && data[1] == tdc_ts_t'({f[2][22:0], t[2]}), "refill of cache 1");
        rd = 2'b11; @(negedge clk160); rd = 2'b00;
      end
      check(valid == 2'b00, "both caches freed");
    end
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
