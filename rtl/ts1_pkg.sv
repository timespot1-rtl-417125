// ts1_pkg: widths and word formats shared by the pixel TDC and the readout.
//
// TDC word: 15-bit time of arrival (TA, in ps, covering the 25 ns period of
// the 40 MHz reference) and 8-bit time over threshold (ToT, in DCO_0
// periods of about 1 ns): 23 bits, as the text gives them.  The pixel sends
// it on a 24-bit serial frame (the serial word length of the TDC summary
// table); the extra most significant bit is zero in normal mode and holds
// cnt0[7] in debug mode, where the frame is {cnt0, cnt1, ToT}.
// Readout word: 8-bit pixel address, 23-bit TDC word, 9-bit timestamp = 40 bits.
package ts1_pkg;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int TA_W        = 15;
  localparam int TOT_W       = 8;
  localparam int CNT_W       = 8;
  localparam int TDC_W       = TA_W + TOT_W;          // 23
  localparam int FRAME_W     = 24;                    // pixel serial frame
  localparam int TS_W        = 9;
  localparam int PIX_ADDR_W  = 8;
  localparam int TDC_TS_W    = TDC_W + TS_W;          // 32
  localparam int HIT_W       = PIX_ADDR_W + TDC_TS_W; // 40
  localparam int PERIOD_W    = 11;                    // DCO period in ps (< 2048)
  localparam int FINE_W      = 12;                    // 4 stages x 3 tri-state buffers
  localparam int COARSE_W    = 2;                     // 4 taps of the delay line

  typedef struct packed {
    logic [TA_W-1:0]  ta;
    logic [TOT_W-1:0] tot;
  } tdc_word_t;

  typedef struct packed {
    tdc_word_t        tdc;
    logic [TS_W-1:0]  ts;
  } tdc_ts_t;

  typedef struct packed {
    logic [PIX_ADDR_W-1:0] addr;
    tdc_ts_t               data;
  } hit_word_t;

  // Per-pixel configuration byte.
  typedef struct packed {
    logic       afe_pwr_on;  // bit 4: analog front end powered
    logic       afe_tp_en;   // bit 3: test pulse to the charge injection (EN_TP)
    logic       tdc_tp_en;   // bit 2: TDC input taken from its own test pulse
    logic       debug;       // bit 1: send cnt0/cnt1 instead of TA
    logic       enable;      // bit 0: channel accepts hits
  } pix_cfg_t;

  // Fine code 0..8 -> one-hot drive selection of the 4 fine stages.
  // Level of stage i is 0 (weakest, slowest) .. 2 (strongest).  Code f raises
  // the stages one at a time: stage i gets f/4 + (i < f%4).
  function automatic logic [FINE_W-1:0] fine_code_to_ctrl(input logic [3:0] f);
    logic [FINE_W-1:0] c;
    int lvl;
    c = '0;
    for (int i = 0; i < 4; i++) begin
      lvl = int'(f) / 4 + ((i < int'(f) % 4) ? 1 : 0);
      if (lvl > 2) lvl = 2;
      c[3*i + lvl] = 1'b1;
    end
    return c;
  endfunction
endpackage
