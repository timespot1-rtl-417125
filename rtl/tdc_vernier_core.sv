// tdc_vernier_core: the Vernier time-to-digital converter core of one pixel.
//
//   start FF : D = 1, clocked by the rising edge of hit; it enables DCO_0.
//              It is cleared when hit is low and the coincidence flag CC is
//              set (both measurements finished), or by clr.
//   stop FF  : D = start, clocked by the 40 MHz reference; it enables DCO_1
//              from the first reference edge after the hit.  Cleared by CC.
//   CC       : coincidence circuit.  A flip-flop samples ck_0 on the rising
//              edge of ck_1; when that sample goes from 1 to 0 the rising
//              edge of ck_1 has just overtaken the rising edge of ck_0 and
//              CC is set.  (The figure clocks a second flip-flop with the
//              inverted output of the first; here the same 1->0 detection is
//              written synchronously to ck_1.)
//   cnt_0    : counts rising edges of ck_0 until CC.  Its enable is CC
//              re-sampled by ck_0, so the ck_0 edge that completes the
//              coincidence is still counted (in silicon the CC flip-flops'
//              delay plays this part).
//   cnt_1    : counts rising edges of ck_1 until CC, including the edge that
//              sets it.
//   cnt_tot  : counts rising edges of ck_0 while hit is high (ToT), saturating.
//
// With these conventions the TA formula (cnt0-1)*T0 - (cnt1-1)*T1 gives the
// lower edge of the Vernier bin holding hit-to-reference time.
// clr (asynchronous, active high) re-arms the converter after the result has
// been read.  cal_en0 / cal_en1 let the calibration run the DCOs directly.
//
// From the chip description: start and stop flip-flops, the coincidence
// circuit, the three counters and the TA formula. Own choice: the exact
// counter gating that makes the formula give the lower edge of the Vernier
// bin.
module tdc_vernier_core
  import ts1_pkg::*;
(
  input  logic             hit,
  input  logic             clk40,
  input  logic             clr,
  input  logic             ck_0,      // DCO_0 output (slow)
  input  logic             ck_1,      // DCO_1 output (fast)
  input  logic             cal_en0,
  input  logic             cal_en1,
  output logic             dco_en0,
  output logic             dco_en1,
  output logic             start,
  output logic             stop,
  output logic             cc,
  output logic [CNT_W-1:0] cnt0,
  output logic [CNT_W-1:0] cnt1,
  output logic [TOT_W-1:0] cnt_tot
);
  timeunit 1ps;
  timeprecision 1ps;

  logic start_rst;
  logic ff1;
  logic cc_ck0;

  assign start_rst = clr | (~hit & cc);

  always_ff @(posedge hit or posedge start_rst) begin
    if (start_rst) start <= 1'b0;
    else           start <= 1'b1;
  end

  always_ff @(posedge clk40 or posedge cc or posedge clr) begin
    if (cc || clr) stop <= 1'b0;
    else           stop <= start;
  end

  // Coincidence circuit, ck_1 domain.
  always_ff @(posedge ck_1 or posedge clr) begin
    if (clr) begin
      ff1 <= 1'b0;
      cc  <= 1'b0;
    end else if (stop && !cc) begin
      ff1 <= ck_0;
      if (ff1 && !ck_0) cc <= 1'b1;
    end
  end

  always_ff @(posedge ck_1 or posedge clr) begin
    if (clr)                cnt1 <= '0;
    else if (stop && !cc)   cnt1 <= cnt1 + 1'b1;
  end

  always_ff @(posedge ck_0 or posedge clr) begin
    if (clr) begin
      cc_ck0 <= 1'b0;
      cnt0   <= '0;
    end else begin
      cc_ck0 <= cc;
      if (!cal_en0 && !cc_ck0) cnt0 <= cnt0 + 1'b1;
    end
  end

  always_ff @(posedge ck_0 or posedge clr) begin
    if (clr)                           cnt_tot <= '0;
    else if (hit && start && cnt_tot != '1) cnt_tot <= cnt_tot + 1'b1;
  end

  assign dco_en0 = start | cal_en0;
  assign dco_en1 = stop  | cal_en1;
endmodule
