// tb_ts1_config: the register file at its default size (1024 pixels).
// Checks reset values, write and read-back of every global register, the
// eight DAC codes and random pixel configuration bytes, the one-cycle
// command pulses (calibration start, test pulse), and that writes outside
// the map change nothing.
module tb_ts1_config;
  import ts1_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int N_PIX = 1024;
  logic clk = 0, rst_n = 1, wr_en = 0;
  logic [15:0] wr_addr = '0, rd_addr = '0;
  logic [7:0] wr_data = '0, rd_data, header, idle, res_target_ps;
  logic cal_start, tp_fire;
  logic [2:0] tp_phase;
  logic [4:0] tp_width;
  logic [7:0] dac_code [8];
  pix_cfg_t pix_cfg [N_PIX];
  int checks = 0, failures = 0, n_cal = 0, n_tp = 0;
  logic [4:0] model [N_PIX];

  always #12500 clk = ~clk;
  ts1_config dut (.*);
  always @(posedge clk) begin
    if (cal_start) n_cal++;
    if (tp_fire) n_tp++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  task automatic wr(input logic [15:0] a, input logic [7:0] d);
    @(negedge clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  // combinational read port
  task automatic rd_check(input logic [15:0] a, input logic [7:0] exp, input string what);
    rd_addr = a;
    #1;
    check(rd_data == exp, $sformatf("read %s: %h, expected %h", what, rd_data, exp));
  endtask

  initial begin
    #1 rst_n = 0;
    #100000 rst_n = 1;
    @(negedge clk);
    check(header == 8'hB5 && idle == 8'h3C, "reset header and idle bytes");
    check(res_target_ps == 8'd50, "reset resolution target 50 ps");
    check(pix_cfg[0] == pix_cfg_t'(5'h11) && pix_cfg[N_PIX-1] == pix_cfg_t'(5'h11), "reset pixel config");
    rd_check(16'h1000 + 16'(N_PIX - 1), 8'h11, "pixel config at reset");
    for (int i = 0; i < N_PIX; i++) model[i] = 5'h11;

    wr(16'h0000, 8'hA7); check(header == 8'hA7, "header register"); rd_check(16'h0000, 8'hA7, "header register");
    wr(16'h0001, 8'h66); check(idle == 8'h66, "idle register"); rd_check(16'h0001, 8'h66, "idle register");
    wr(16'h0003, 8'd35); check(res_target_ps == 8'd35, "resolution target"); rd_check(16'h0003, 8'd35, "resolution target");
    wr(16'h0004, 8'hFD); check(tp_phase == 3'd5, "test-pulse phase"); rd_check(16'h0004, 8'h05, "test-pulse phase");
    wr(16'h0005, 8'hF3); check(tp_width == 5'd19, "test-pulse width"); rd_check(16'h0005, 8'h13, "test-pulse width");
    for (int i = 0; i < 8; i++) begin
      logic [7:0] v;
      v = 8'($urandom);
      wr(16'h0010 + 16'(i), v);
      check(dac_code[i] == v, $sformatf("DAC %0d", i)); rd_check(16'h0010 + 16'(i), v, $sformatf("DAC %0d", i));
    end
    // commands
    wr(16'h0002, 8'h01);
    @(negedge clk);
    check(n_cal == 1 && n_tp == 0, "calibration start pulse");
    wr(16'h0002, 8'h02);
    @(negedge clk);
    check(n_cal == 1 && n_tp == 1, "test pulse command");
    wr(16'h0002, 8'h03);
    @(negedge clk);
    check(n_cal == 2 && n_tp == 2, "both commands");
    // pixels
    for (int t = 0; t < 400; t++) begin
      int p;
      logic [7:0] v;
      p = (t < 2) ? t * (N_PIX - 1) : int'($urandom_range(N_PIX - 1));
      v = 8'($urandom);
      wr(16'h1000 + 16'(p), v);
      model[p] = v[4:0];
      check(pix_cfg[p] == pix_cfg_t'(v[4:0]), "pixel config output");
      rd_check(16'h1000 + 16'(p), {3'b0, v[4:0]}, "pixel config");
    end
    // writes outside the map
    wr(16'h1000 + 16'(N_PIX), 8'h00);
    wr(16'h0FFF, 8'h00);
    wr(16'h0006, 8'h00);
    begin
      bit same;
      same = 1;
      for (int p = 0; p < N_PIX; p++) if (pix_cfg[p] != pix_cfg_t'(model[p])) same = 0;
      check(same, "all pixel configs match the model");
      check(header == 8'hA7 && idle == 8'h66 && res_target_ps == 8'd35, "globals unchanged");
      rd_check(16'h0006, 8'h00, "unmapped"); rd_check(16'h1000 + 16'(N_PIX), 8'h00, "unmapped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
