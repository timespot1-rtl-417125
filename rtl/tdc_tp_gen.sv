// tdc_tp_gen: self-generated test pulse of the pixel TDC.
//
// The pulse starts on one of seven test points TP1..TP7 that fall on the
// edges (rising and falling) of the 160 MHz clock inside one 40 MHz period:
// TP k is k * 3.125 ns after the rising edge of clk40, so the TA the TDC
// measures (to the next clk40 rising edge) is 25 ns - k * 3.125 ns.  The
// width is (tp_width + 1) * 6.25 ns, 32 widths from 6.25 ns to 200 ns.
//
// How: a posedge flip-flop `pul` rises at the clk160 edge that starts 160 MHz
// cycle m = k/2 of the 40 MHz period and stays high for (tp_width+1) cycles.
// For odd k the output is the copy of `pul` re-timed on the falling clk160
// edge, i.e. half a cycle later.  Both copies start and end on the same kind
// of edge, and the select is static, so the output has no glitches.
//
// A rising edge of tp_fire arms one pulse; ph160 is the index of the
// current 160 MHz cycle in the 40 MHz period (from clock_div).  tp_phase = 0
// is treated as TP 1.  busy is high from tp_fire until the pulse ends.
//
// From the chip description: seven phases of the 160 MHz clock using both
// edges (3.125 ns steps) and 32 widths. Own choices: width (w + 1) x 6.25 ns
// and phase 0 taken as 1.
module tdc_tp_gen (
  input  logic       clk160,
  input  logic       rst_n,
  input  logic [1:0] ph160,
  input  logic       tp_fire,
  input  logic [2:0] tp_phase,   // 1..7
  input  logic [4:0] tp_width,   // width = (tp_width+1) * 6.25 ns
  output logic       tp,
  output logic       busy
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [2:0] k;
  logic [1:0] m;
  logic       armed;
  logic       pul;
  logic       pul_n;
  logic [4:0] left;
  logic       fire_q;

  assign k = (tp_phase == 3'd0) ? 3'd1 : tp_phase;
  assign m = k[2:1];

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      armed  <= 1'b0;
      pul    <= 1'b0;
      left   <= '0;
      fire_q <= 1'b0;
    end else begin
      fire_q <= tp_fire;
      if (tp_fire && !fire_q && !armed && !pul) armed <= 1'b1;
      // ph160 holds the index of the cycle now ending; the next one is m.
      if (armed && (ph160 + 2'd1) == m) begin
        armed <= 1'b0;
        pul   <= 1'b1;
        left  <= tp_width;
      end else if (pul) begin
        if (left == '0) pul <= 1'b0;
        else            left <= left - 1'b1;
      end
    end
  end

  always_ff @(negedge clk160 or negedge rst_n) begin
    if (!rst_n) pul_n <= 1'b0;
    else        pul_n <= pul;
  end

  assign tp   = k[0] ? pul_n : pul;
  assign busy = armed | pul | pul_n;
endmodule
