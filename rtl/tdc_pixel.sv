// tdc_pixel: the digital part of one pixel - a Vernier TDC that measures the
// time of arrival (TA) of the discriminator output with respect to the
// 40 MHz reference and its time over threshold (ToT), and sends the result on
// its own 160 Mb/s serial line with a data-valid (DV) strobe.
//
// Contents: two DCOs (DCO_0 slow, DCO_1 fast), the Vernier core (start/stop
// flip-flops, coincidence circuit, cnt_0, cnt_1, cnt_tot), the calibration
// logic that tunes the DCOs and stores their periods T0/T1, the TA arithmetic,
// the test-pulse generator, and the publication controller.
//
// Fixed latency: conversion time depends on the hit phase, so the result is
// not sent when the conversion ends but a fixed LATENCY clk160 cycles after
// the controller sees the measurement start (first clk40 edge after the hit,
// seen one clk160 cycle later).  Then the word is registered, the core is
// cleared (clr, one cycle) and the 24-bit frame is shifted out MSB first
// with DV high for its 24 cycles.  The pixel is blind from the hit to the
// clear: with LATENCY = 48 (300 ns) the dead time is 306..337 ns depending on
// the hit phase, i.e. about 3 MHz of sustainable rate, as the text states.
// The frame (24 bits) is shorter than the dead time, so frames never overlap.
//
// Frame: normal {1'b0, TA[14:0] in ps, ToT[7:0] in DCO_0 periods};
// debug {cnt0, cnt1, ToT}.
// After reset the controller pulses clr twice (high, low, high) so that every
// flip-flop of the core starts cleared even if its asynchronous reset input
// was already high; it pulses clr again when a calibration ends, to drop the
// counts left by the last DCO edges.
// Input selection: hit = enable & !calibrating & (tdc_tp_en ? own test pulse
// : AFE discriminator output).  afe_tp is the test pulse for the analog
// charge injection (gated by afe_tp_en).  All control runs on clk160; the
// 40 MHz clock only clocks the stop flip-flop and the start detector.
module tdc_pixel
  import ts1_pkg::*;
#(
  parameter int unsigned LATENCY       = 48,   // clk160 cycles
  parameter int          DCO0_OFFSET_PS = 0,   // behavioural mismatch of DCO_0
  parameter int          DCO1_OFFSET_PS = 0    // behavioural mismatch of DCO_1
) (
  input  logic             clk160,
  input  logic             clk40,
  input  logic             rst_n,
  input  logic [1:0]       ph160,
  input  pix_cfg_t         cfg,
  input  logic             hit_afe,       // discriminator output
  input  logic             cal_start,
  input  logic [7:0]       res_target_ps,
  input  logic             tp_fire,
  input  logic [2:0]       tp_phase,
  input  logic [4:0]       tp_width,
  output logic             afe_tp,
  output logic             ser,           // 160 Mb/s serial data
  output logic             dv,            // data valid
  output logic             cal_done,
  output logic             busy
);
  timeunit 1ps;
  timeprecision 1ps;

  logic ck_0, ck_1, dco_en0, dco_en1, cal_en0, cal_en1;
  logic start, stop, cc, clr, meas;
  logic [CNT_W-1:0] cnt0, cnt1;
  logic [TOT_W-1:0] cnt_tot;
  logic [COARSE_W-1:0] coarse0, coarse1;
  logic [3:0] fine_code0, fine_code1;
  logic [PERIOD_W-1:0] t0_ps, t1_ps;
  logic [TA_W-1:0] ta_ps;
  logic cal_busy, tp, tp_busy, hit;

  tdc_tp_gen u_tp (
    .clk160, .rst_n, .ph160, .tp_fire, .tp_phase, .tp_width, .tp, .busy(tp_busy)
  );

  assign hit    = cfg.enable & ~cal_busy & (cfg.tdc_tp_en ? tp : hit_afe);
  assign afe_tp = tp & cfg.afe_tp_en;

  tdc_dco #(.OFFSET_PS(DCO0_OFFSET_PS)) u_dco0 (
    .enable(dco_en0), .fine_ctrls(fine_code_to_ctrl(fine_code0)),
    .coarse_ctrls(coarse0), .dco_clk(ck_0)
  );
  tdc_dco #(.OFFSET_PS(DCO1_OFFSET_PS)) u_dco1 (
    .enable(dco_en1), .fine_ctrls(fine_code_to_ctrl(fine_code1)),
    .coarse_ctrls(coarse1), .dco_clk(ck_1)
  );

  tdc_vernier_core u_core (
    .hit, .clk40, .clr, .ck_0, .ck_1, .cal_en0, .cal_en1,
    .dco_en0, .dco_en1, .start, .stop, .cc, .cnt0, .cnt1, .cnt_tot
  );

  tdc_calib u_cal (
    .clk160, .rst_n, .cal_start, .res_target_ps, .ck_0, .ck_1,
    .cal_en0, .cal_en1, .coarse0, .coarse1, .fine_code0, .fine_code1,
    .t0_ps, .t1_ps, .cal_busy, .cal_done
  );

  tdc_ta_calc u_ta (.cnt0, .cnt1, .t0_ps, .t1_ps, .ta_ps);

  // Start detector on the reference clock: set at the clk40 edge at which
  // the stop flip-flop is loaded, kept until clr.
  always_ff @(posedge clk40 or posedge clr) begin
    if (clr)        meas <= 1'b0;
    else if (start) meas <= 1'b1;
  end

  // Publication controller.
  typedef enum logic [1:0] {C_INIT, C_IDLE, C_WAIT, C_CLR} cstate_t;
  cstate_t cstate;
  logic [6:0] lat;
  logic [FRAME_W-1:0] sr;
  logic [4:0] nbits;
  logic cal_busy_q;

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      cstate <= C_INIT;
      lat    <= '0;
      clr    <= 1'b0;
      sr     <= '0;
      nbits  <= '0;
      dv     <= 1'b0;
      cal_busy_q <= 1'b0;
    end else begin
      clr <= 1'b0;
      cal_busy_q <= cal_busy;
      // Serial output: one bit per clk160 cycle, MSB first.
      if (nbits != '0) begin
        sr    <= {sr[FRAME_W-2:0], 1'b0};
        nbits <= nbits - 1'b1;
        dv    <= (nbits != 5'd1);
      end
      case (cstate)
        C_INIT: begin                // after reset: clear the core twice
          clr    <= ~lat[0];          // (high, low, high) so that a flop
          lat    <= lat + 1'b1;       // whose reset input was already high
          if (lat == 7'd2) begin      // still sees a rising edge
            lat    <= '0;
            cstate <= C_CLR;
          end
        end
        C_IDLE: if (cal_busy_q && !cal_busy) begin
          clr    <= 1'b1;            // drop counts left by the last DCO edges
          cstate <= C_CLR;
        end else if (meas) begin
          lat    <= 7'(LATENCY - 1);
          cstate <= C_WAIT;
        end
        C_WAIT: begin
          if (lat == '0) begin
            sr     <= cfg.debug ? {cnt0, cnt1, cnt_tot} : {1'b0, ta_ps, cnt_tot};
            nbits  <= 5'(FRAME_W);
            dv     <= 1'b1;
            clr    <= 1'b1;
            cstate <= C_CLR;
          end else lat <= lat - 1'b1;
        end
        default: cstate <= C_IDLE;   // clr is high this cycle; meas clears
      endcase
    end
  end

  assign ser  = sr[FRAME_W-1];
  assign busy = meas | start | (cstate != C_IDLE) | tp_busy;

  // The frame must be complete before the next one can be loaded.
  a_no_overlap: assert property (@(posedge clk160) disable iff (!rst_n)
    (cstate == C_WAIT && lat == '0) |-> (nbits == '0));
endmodule
