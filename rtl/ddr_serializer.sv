// ddr_serializer: turns the byte stream of the protocol block (one byte per
// clk160 cycle) into a 1280 Mb/s bit stream, two bits per 640 MHz cycle
// (double data rate), most significant bit first.  The byte is loaded at the
// 640 MHz edge that follows the 160 MHz rising edge (ph640 == 0 before that
// edge); each 640 MHz cycle presents one bit while clk640 is high and the
// next while it is low.  `dout` feeds the LVDS driver.  The falling-edge
// register keeps the low-phase bit stable for the whole low half period.
// Latency from the clk160 edge that updates `byte_in` to its first bit:
// one 640 MHz cycle.
//
// From the chip description: each link carries one byte per 160 MHz cycle
// through a 640 MHz double-data-rate serializer, 1.28 Gb/s. Own choice: bit
// order (MSB first) and the byte-load phase.
module ddr_serializer (
  input  logic       clk640,
  input  logic       rst_n,
  input  logic [1:0] ph640,
  input  logic [7:0] byte_in,
  output logic       dout
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [7:0] sh;
  logic       b_rise, b_fall_pre, b_fall;

  always_ff @(posedge clk640 or negedge rst_n) begin
    if (!rst_n) begin
      sh         <= '0;
      b_rise     <= 1'b0;
      b_fall_pre <= 1'b0;
    end else if (ph640 == 2'd0) begin
      b_rise     <= byte_in[7];
      b_fall_pre <= byte_in[6];
      sh         <= {byte_in[5:0], 2'b00};
    end else begin
      b_rise     <= sh[7];
      b_fall_pre <= sh[6];
      sh         <= {sh[5:0], 2'b00};
    end
  end

  always_ff @(negedge clk640 or negedge rst_n) begin
    if (!rst_n) b_fall <= 1'b0;
    else        b_fall <= b_fall_pre;
  end

  assign dout = clk640 ? b_rise : b_fall;
endmodule
