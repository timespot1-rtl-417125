// timestamp_counter: global 9-bit hit timestamp, the number of 40 MHz periods
// since the external start signal.  It holds 0 until ts_start is seen high
// at a clk40 edge, then counts every clk40 cycle and wraps at 512 (12.8 us).
// A new ts_start while running restarts the count from 0.
//
// From the chip description: 9 bits at 40 MHz, started by an external signal.
// Own choice: it wraps at 512 and a new start clears it.
module timestamp_counter
  import ts1_pkg::*;
(
  input  logic            clk40,
  input  logic            rst_n,
  input  logic            ts_start,
  output logic [TS_W-1:0] ts,
  output logic            running
);
  timeunit 1ps;
  timeprecision 1ps;

  always_ff @(posedge clk40 or negedge rst_n) begin
    if (!rst_n) begin
      ts      <= '0;
      running <= 1'b0;
    end else if (ts_start) begin
      ts      <= '0;
      running <= 1'b1;
    end else if (running) begin
      ts <= ts + 1'b1;
    end
  end
endmodule
