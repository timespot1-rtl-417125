// timespot1_top: digital top level of the 32 x 32 pixel timing readout chip.
//
// 1024 channels in four groups of 256 (two mirrored 16 x 32 half matrices,
// two groups each).  Every channel has its analog front end (outside this
// RTL; its discriminator output enters on afe_hit, its test-pulse and power
// controls leave on afe_tp / afe_en_tp / afe_pwr_on) and a Vernier TDC
// (tdc_pixel).  Each group has a readout tree (rot) that adds the pixel
// address and the global timestamp and drives two 1.28 Gb/s links: 8 links,
// 10.24 Gb/s in total.  The 640 MHz system clock is divided to 160 MHz and
// 40 MHz (clock_div); the 9-bit timestamp counts 40 MHz cycles from the
// external ts_start.  Configuration is written through the I2C-style slow
// control (i2c_target + ts1_config, clocked at 40 MHz).
//
// Pixel p (0..1023) belongs to group p / 256 and has address p % 256 inside
// it.  Link 2g and 2g+1 carry group g.  The eight reference DAC codes leave on
// dac_code; the DACs, bandgaps and LVDS drivers are analog and not part of
// this RTL.  N_PIX_GROUP can be lowered for fast simulation; the default is
// the chip's.  DCO mismatch is modelled by a small per-pixel offset of the
// behavioural DCO half period (a deterministic pattern of -5..+5 ps).
module timespot1_top
  import ts1_pkg::*;
#(
  parameter int unsigned N_GROUPS    = 4,
  parameter int unsigned N_PIX_GROUP = 256,
  parameter int unsigned LATENCY     = 48
) (
  input  logic                            clk640,
  input  logic                            rst_n,
  input  logic                            ts_start,
  input  logic                            scl,
  input  logic                            sda_in,
  output logic                            sda_oe,
  input  logic [N_GROUPS*N_PIX_GROUP-1:0] afe_hit,
  output logic [N_GROUPS*N_PIX_GROUP-1:0] afe_tp,
  output logic [N_GROUPS*N_PIX_GROUP-1:0] afe_en_tp,
  output logic [N_GROUPS*N_PIX_GROUP-1:0] afe_pwr_on,
  output logic [7:0][7:0]                 dac_code,
  output logic [2*N_GROUPS-1:0]           lvds_dout,
  output logic [N_GROUPS*N_PIX_GROUP-1:0] cal_done,
  output logic [N_GROUPS-1:0][15:0]       lost_cnt,
  output logic [N_GROUPS-1:0][15:0]       stall_cnt
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned N_PIX = N_GROUPS * N_PIX_GROUP;

  logic clk160, clk40;
  logic [1:0] ph640, ph160;
  logic [TS_W-1:0] ts;
  logic ts_running;

  clock_div u_clk (.clk640, .rst_n, .clk160, .clk40, .ph640, .ph160);

  timestamp_counter u_ts (.clk40, .rst_n, .ts_start, .ts, .running(ts_running));

  // Slow control.
  logic        wr_en;
  logic [15:0] wr_addr, rd_addr;
  logic [7:0]  wr_data, rd_data;
  logic [7:0]  header, idle, res_target_ps;
  logic        cal_start, tp_fire;
  logic [2:0]  tp_phase;
  logic [4:0]  tp_width;
  logic [7:0]  dac [8];
  pix_cfg_t    pix_cfg [N_PIX];

  i2c_target u_i2c (
    .clk(clk40), .rst_n, .scl, .sda_in, .sda_oe,
    .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data
  );

  ts1_config #(.N_PIX(N_PIX)) u_cfg (
    .clk(clk40), .rst_n, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data,
    .header, .idle, .cal_start, .tp_fire, .res_target_ps, .tp_phase, .tp_width,
    .dac_code(dac), .pix_cfg
  );

  for (genvar i = 0; i < 8; i++) begin : g_dac
    assign dac_code[i] = dac[i];
  end

  // Pixel matrix.
  logic [N_PIX-1:0] pix_ser, pix_dv, pix_busy;

  for (genvar p = 0; p < N_PIX; p++) begin : g_pix
    tdc_pixel #(
      .LATENCY(LATENCY),
      .DCO0_OFFSET_PS(int'((p * 37) % 11) - 5),
      .DCO1_OFFSET_PS(int'((p * 53) % 11) - 5)
    ) u_pix (
      .clk160, .clk40, .rst_n, .ph160, .cfg(pix_cfg[p]), .hit_afe(afe_hit[p]),
      .cal_start, .res_target_ps, .tp_fire, .tp_phase, .tp_width,
      .afe_tp(afe_tp[p]), .ser(pix_ser[p]), .dv(pix_dv[p]),
      .cal_done(cal_done[p]), .busy(pix_busy[p])
    );
    assign afe_en_tp[p]  = pix_cfg[p].afe_tp_en;
    assign afe_pwr_on[p] = pix_cfg[p].afe_pwr_on;
  end

  // Readout trees.
  for (genvar g = 0; g < N_GROUPS; g++) begin : g_rot
    logic [1:0] ff;
    rot #(.N_PIX(N_PIX_GROUP)) u_rot (
      .clk160, .clk640, .rst_n, .ph640, .ts,
      .pix_ser(pix_ser[g*N_PIX_GROUP +: N_PIX_GROUP]),
      .pix_dv(pix_dv[g*N_PIX_GROUP +: N_PIX_GROUP]),
      .header, .idle, .dout(lvds_dout[2*g +: 2]),
      .lost_cnt(lost_cnt[g]), .stall_cnt(stall_cnt[g]), .fifo_full(ff)
    );
  end
endmodule
