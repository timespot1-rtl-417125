// clock_div: clock distribution root.  The chip receives one 640 MHz system
// clock; the 160 MHz and 40 MHz internal clocks are obtained from it by
// division (4 and 16), as the clock diagram of the test-pulse scheme shows.
// A 2-bit counter on 640 MHz makes clk160; a 2-bit counter on clk160 makes
// clk40.  Rising edges of clk40 coincide with rising edges of clk160, and
// rising edges of clk160 with rising edges of clk640.
//
// Outputs besides the clocks:
//   ph640  - index 0..3 of the 640 MHz cycle inside the current 160 MHz cycle
//            (value before the 640 MHz edge; the 160 MHz edge follows the
//            640 MHz edge at which ph640 goes 3 -> 0)
//   ph160  - index 0..3 of the 160 MHz cycle inside the 40 MHz period
//            (0 = the cycle that starts at the clk40 rising edge)
// Reset is asynchronous, active low; after reset all clocks are low and the
// first clk160 / clk40 rising edge follows the first clk640 rising edge.
//
// From the chip description: one 640 MHz input clock from which 160 MHz and
// 40 MHz are derived. Own choice: counter dividers and the phase relation
// between the three clocks.
module clock_div (
  input  logic       clk640,
  input  logic       rst_n,
  output logic       clk160,
  output logic       clk40,
  output logic [1:0] ph640,
  output logic [1:0] ph160
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [1:0] c4;
  logic [1:0] c16;

  always_ff @(posedge clk640 or negedge rst_n) begin
    if (!rst_n) begin
      c4     <= 2'd3;
      clk160 <= 1'b0;
    end else begin
      c4     <= c4 + 2'd1;
      clk160 <= (c4 == 2'd3) || (c4 == 2'd0);   // high in cycles 0 and 1
    end
  end

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      c16   <= 2'd3;
      clk40 <= 1'b0;
    end else begin
      c16   <= c16 + 2'd1;
      clk40 <= (c16 == 2'd3) || (c16 == 2'd0);  // high in cycles 0 and 1
    end
  end

  assign ph640 = c4;
  assign ph160 = c16;
endmodule
