// ts1_config: configuration register file written and read through the
// slow-control target (clk40 domain).  Register map (16-bit addresses):
//   0x0000 header byte of the link protocol     (reset 0xB5)
//   0x0001 idle byte of the link protocol       (reset 0x3C)
//   0x0002 command, write-only pulses: bit 0 start DCO calibration,
//          bit 1 fire one test pulse (both high for one clk40 cycle)
//   0x0003 target Vernier resolution T0-T1 in ps (reset 50)
//   0x0004 test-pulse phase TP1..TP7            (reset 1)
//   0x0005 test-pulse width code 0..31          (reset 0)
//   0x0010..0x0017 codes of the 8 reference DACs (reset 0x80)
//   0x1000 + p     pixel p configuration byte: bit 0 enable, bit 1 debug
//          (counters instead of TA), bit 2 TDC self test pulse, bit 3 test
//          pulse to the analog charge injection, bit 4 analog front end on
//          (reset 0x11: enabled and powered)
// Unmapped addresses read 0.
//
// The register map, reset values and command pulses are this design's own;
// the chip description only says which quantities are programmable (header
// and idle bytes, test pulses, DACs, per-pixel settings).
module ts1_config
  import ts1_pkg::*;
#(
  parameter int unsigned N_PIX = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [15:0] wr_addr,
  input  logic [7:0]  wr_data,
  input  logic [15:0] rd_addr,
  output logic [7:0]  rd_data,
  output logic [7:0]  header,
  output logic [7:0]  idle,
  output logic        cal_start,
  output logic        tp_fire,
  output logic [7:0]  res_target_ps,
  output logic [2:0]  tp_phase,
  output logic [4:0]  tp_width,
  output logic [7:0]  dac_code [8],
  output pix_cfg_t    pix_cfg [N_PIX]
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam logic [15:0] PIX_BASE = 16'h1000;
  localparam int PW = (N_PIX > 1) ? $clog2(N_PIX) : 1;
  logic [15:0] wr_off, rd_off;
  assign wr_off = wr_addr - PIX_BASE;
  assign rd_off = rd_addr - PIX_BASE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      header        <= 8'hB5;
      idle          <= 8'h3C;
      cal_start     <= 1'b0;
      tp_fire       <= 1'b0;
      res_target_ps <= 8'd50;
      tp_phase      <= 3'd1;
      tp_width      <= 5'd0;
      for (int i = 0; i < 8; i++) dac_code[i] <= 8'h80;
      for (int p = 0; p < int'(N_PIX); p++) pix_cfg[p] <= pix_cfg_t'(5'h11);
    end else begin
      cal_start <= 1'b0;
      tp_fire   <= 1'b0;
      if (wr_en) begin
        case (wr_addr)
          16'h0000: header        <= wr_data;
          16'h0001: idle          <= wr_data;
          16'h0002: begin
            cal_start <= wr_data[0];
            tp_fire   <= wr_data[1];
          end
          16'h0003: res_target_ps <= wr_data;
          16'h0004: tp_phase      <= wr_data[2:0];
          16'h0005: tp_width      <= wr_data[4:0];
          default: begin
            if (wr_addr[15:3] == 13'h0002) dac_code[wr_addr[2:0]] <= wr_data;
            else if (wr_addr >= PIX_BASE && wr_addr < PIX_BASE + 16'(N_PIX))
              pix_cfg[wr_off[PW-1:0]] <= pix_cfg_t'(wr_data[4:0]);
          end
        endcase
      end
    end
  end

  always_comb begin
    rd_data = 8'h00;
    case (rd_addr)
      16'h0000: rd_data = header;
      16'h0001: rd_data = idle;
      16'h0003: rd_data = res_target_ps;
      16'h0004: rd_data = {5'd0, tp_phase};
      16'h0005: rd_data = {3'd0, tp_width};
      default: begin
        if (rd_addr[15:3] == 13'h0002) rd_data = dac_code[rd_addr[2:0]];
        else if (rd_addr >= PIX_BASE && rd_addr < PIX_BASE + 16'(N_PIX))
          rd_data = {3'd0, pix_cfg[rd_off[PW-1:0]]};
      end
    endcase
  end
endmodule
