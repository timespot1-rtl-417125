// rot: readout processing logic of one group of N_PIX (256) pixels: the
// readout tree with its caches, the two output FIFOs, and the two links
// (protocol encoder + DDR serializer), all at 160 MHz except the last
// serializer stage at 640 MHz DDR.
//
// Data path per hit: pixel serial frame -> rot_pixel_cache (paired with the
// 9-bit timestamp, two entries per pixel) -> rot_tree (one entry read and
// freed per clk160 cycle, 8-bit address added) -> one of two 32 x 40-bit
// FIFOs -> tx_protocol (header + 5 bytes) -> ddr_serializer (1280 Mb/s).
//
// FIFO choice: the tree output goes to the FIFO whose turn it is (they
// alternate) or, if that one is full, to the other one.  If both are full
// the tree stalls and the hits wait in the pixel caches; a cache overflow
// drops the hit (counted in lost_cnt).  Stall cycles are counted in
// stall_cnt.  Throughput: tree 160 M entries/s, links 2 x 26.7 M hits/s,
// i.e. about 208 kHz per pixel when all 256 pixels fire uniformly.
//
// From the chip description: 256 TDCs per tree, two caches per pixel, a
// combinational binary tree, two 32-word FIFOs, two links. Own choices: the
// alternating FIFO choice with fall-back, stalling when both are full, and
// the stall / lost counters.
module rot
  import ts1_pkg::*;
#(
  parameter int unsigned N_PIX      = 256,
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic                clk160,
  input  logic                clk640,
  input  logic                rst_n,
  input  logic [1:0]          ph640,
  input  logic [TS_W-1:0]     ts,
  input  logic [N_PIX-1:0]    pix_ser,
  input  logic [N_PIX-1:0]    pix_dv,
  input  logic [7:0]          header,
  input  logic [7:0]          idle,
  output logic [1:0]          dout,          // to the two LVDS drivers
  output logic [15:0]         lost_cnt,
  output logic [15:0]         stall_cnt,
  output logic [1:0]          fifo_full
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [2*N_PIX-1:0] leaf_valid, grant;
  tdc_ts_t            leaf_data [2*N_PIX];
  logic [N_PIX-1:0]   lost;

  for (genvar p = 0; p < N_PIX; p++) begin : g_pix
    tdc_ts_t d2 [2];
    rot_pixel_cache u_cache (
      .clk160, .rst_n, .ser(pix_ser[p]), .dv(pix_dv[p]), .ts,
      .rd(grant[2*p +: 2]), .valid(leaf_valid[2*p +: 2]), .data(d2),
      .lost(lost[p])
    );
    assign leaf_data[2*p]   = d2[0];
    assign leaf_data[2*p+1] = d2[1];
  end

  logic                  any_valid, take;
  logic [PIX_ADDR_W-1:0] addr;
  tdc_ts_t               tdata;
  hit_word_t             hword;

  rot_tree #(.N_PIX(N_PIX)) u_tree (
    .leaf_valid, .leaf_data, .take, .any_valid, .addr, .data(tdata), .grant
  );

  assign hword = '{addr: addr, data: tdata};

  logic       turn, target;
  logic [1:0] wr, full, empty, rd;
  logic [HIT_W-1:0] fdata [2];
  logic [7:0] tx_byte [2];

  always_comb begin
    target = full[turn] ? ~turn : turn;
    take   = any_valid && !(full[0] && full[1]);
    wr     = '0;
    if (take) wr[target] = 1'b1;
  end

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      turn      <= 1'b0;
      lost_cnt  <= '0;
      stall_cnt <= '0;
    end else begin
      if (take) turn <= ~target;
      if (any_valid && !take && stall_cnt != '1) stall_cnt <= stall_cnt + 1'b1;
      if (|lost && lost_cnt != '1) lost_cnt <= lost_cnt + 16'($countones(lost));
    end
  end

  for (genvar l = 0; l < 2; l++) begin : g_link
    logic unused_hdr;
    rot_fifo #(.W(HIT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk(clk160), .rst_n, .wr_en(wr[l]), .wr_data(hword), .rd_en(rd[l]),
      .rd_data(fdata[l]), .full(full[l]), .empty(empty[l]), .count()
    );
    tx_protocol u_proto (
      .clk160, .rst_n, .header, .idle, .fifo_empty(empty[l]),
      .fifo_data(fdata[l]), .fifo_rd(rd[l]), .tx_byte(tx_byte[l]),
      .tx_is_header(unused_hdr)
    );
    ddr_serializer u_ser (
      .clk640, .rst_n, .ph640, .byte_in(tx_byte[l]), .dout(dout[l])
    );
  end

  assign fifo_full = full;
endmodule
