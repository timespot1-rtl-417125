// tdc_dco: BEHAVIOURAL MODEL (not synthesizable) of the digitally controlled
// oscillator of the pixel TDC.  The real part is a ring: a tapped delay line
// closed through a gate with the enable input and an inverter.  The line has
// four fine stages, each made of three tri-state buffers of different drive
// strength in parallel (one of them enabled at a time through fine_ctrls),
// followed by three fixed delay cells; a multiplexer picks the line output
// after the fine stages or after one, two or three fixed cells (coarse_ctrls).
//
// The model computes the half period as the sum of the selected stage delays
// and toggles dco_clk while enable is high.  In stand-by the output rests
// high and the oscillator draws no edges; after enable rises the output falls
// after one half period and rises after a full period, so the first rising
// edge comes one period after enable, as in a gated ring.  When enable falls
// the current period is completed and the output returns high.
//
// fine_ctrls[3*i+2:3*i] is stage i: bit 0 weakest (slowest) buffer, bit 1
// middle, bit 2 strongest.  If more than one bit is set the strongest wins;
// if none is set the stage is taken as the weakest.  coarse_ctrls = 3 is the
// longest line (slowest).  The delay values are this model's own numbers,
// chosen to give about 1 ns periods (the paper's DCO_0 target) and fine steps
// of about 12 ps in the period; OFFSET_PS models a per-instance mismatch.
module tdc_dco #(
  parameter int FINE_BASE_PS = 100,  // weakest fine stage delay
  parameter int FINE_STEP_PS = 6,    // delay reduction per drive level
  parameter int FIXED_PS     = 60,   // fixed (coarse) cell delay
  parameter int GATE_PS      = 10,   // enable gate + inverter + mux
  parameter int OFFSET_PS    = 0     // instance mismatch added to the half period
) (
  input  logic        enable,
  input  logic [11:0] fine_ctrls,
  input  logic [1:0]  coarse_ctrls,
  output logic        dco_clk
);
  timeunit 1ps;
  timeprecision 1ps;

  int half_ps;

  function automatic int stage_delay(input logic [2:0] sel);
    if (sel[2])      return FINE_BASE_PS - 2 * FINE_STEP_PS;
    else if (sel[1]) return FINE_BASE_PS - FINE_STEP_PS;
    else             return FINE_BASE_PS;
  endfunction

  always_comb begin
    half_ps = GATE_PS + OFFSET_PS + int'(coarse_ctrls) * FIXED_PS;
    for (int i = 0; i < 4; i++) half_ps += stage_delay(fine_ctrls[3*i +: 3]);
  end

  initial dco_clk = 1'b1;

  always begin
    wait (enable);
    while (enable) begin
      #(half_ps) dco_clk = 1'b0;
      #(half_ps) dco_clk = 1'b1;
    end
  end
endmodule
