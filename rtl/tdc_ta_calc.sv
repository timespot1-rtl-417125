// tdc_ta_calc: time of arrival in picoseconds from the Vernier counters,
//   TA = (cnt0 - 1) * T0 - (cnt1 - 1) * T1
// with T0 and T1 the calibrated DCO periods in ps.  Purely combinational
// (two 8x11-bit products and a subtraction); the pixel controller registers
// the result when it publishes the hit.  The result is clamped to the
// 15-bit range 0..32767: a value below zero (possible only in the first
// Vernier bin, or when a counter is zero) gives 0.
//
// From the chip description: TA = (cnt0 - 1) T0 - (cnt1 - 1) T1, 15-bit
// result in picoseconds. Own choice: clamping to the 15-bit range.
module tdc_ta_calc
  import ts1_pkg::*;
(
  input  logic [CNT_W-1:0]    cnt0,
  input  logic [CNT_W-1:0]    cnt1,
  input  logic [PERIOD_W-1:0] t0_ps,
  input  logic [PERIOD_W-1:0] t1_ps,
  output logic [TA_W-1:0]     ta_ps
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam int W = CNT_W + PERIOD_W + 2;
  logic signed [W-1:0] p0, p1, diff;

  always_comb begin
    p0   = (W'(signed'({1'b0, cnt0})) - W'(1)) * W'(signed'({1'b0, t0_ps}));
    p1   = (W'(signed'({1'b0, cnt1})) - W'(1)) * W'(signed'({1'b0, t1_ps}));
    diff = p0 - p1;
    if (diff < 0)                       ta_ps = '0;
    else if (diff > W'((1 << TA_W) - 1)) ta_ps = '1;
    else                                ta_ps = diff[TA_W-1:0];
  end
endmodule
