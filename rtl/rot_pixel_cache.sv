// rot_pixel_cache: the readout tree's input stage for one TDC.  It receives
// the 24-bit serial frame (MSB first, one bit per clk160 cycle while DV is
// high), keeps the 23-bit TDC word, pairs it with the global 9-bit timestamp
// sampled in the first DV cycle (the 40 MHz count at which the pixel
// published the hit), and stores the pair in one of two cache entries
// (cache-0 is used when free, otherwise cache-1).  The binary tree reads a
// full entry and frees it with rd[i].  If both entries are full when a frame
// ends, the hit is dropped and `lost` pulses for one cycle.
// A frame is written one cycle after DV falls.  All on clk160.
//
// From the chip description: serial data with DV from each TDC, paired with
// the 9-bit timestamp, two cache entries. Own choices: the timestamp is taken
// when DV rises, and a frame that finds both entries full is dropped and
// flagged.
module rot_pixel_cache
  import ts1_pkg::*;
(
  input  logic              clk160,
  input  logic              rst_n,
  input  logic              ser,
  input  logic              dv,
  input  logic [TS_W-1:0]   ts,
  input  logic [1:0]        rd,       // free cache entry i
  output logic [1:0]        valid,
  output tdc_ts_t           data [2],
  output logic              lost
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [FRAME_W-1:0] sh;
  logic               dv_q;
  logic [TS_W-1:0]    ts_cap;
  logic               wr;
  tdc_ts_t            word;

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      sh     <= '0;
      dv_q   <= 1'b0;
      ts_cap <= '0;
    end else begin
      dv_q <= dv;
      if (dv)         sh     <= {sh[FRAME_W-2:0], ser};
      if (dv && !dv_q) ts_cap <= ts;
    end
  end

  assign wr   = dv_q && !dv;
  assign word = '{tdc: sh[TDC_W-1:0], ts: ts_cap};

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      lost  <= 1'b0;
      data[0] <= '0;
      data[1] <= '0;
    end else begin
      lost <= 1'b0;
      for (int i = 0; i < 2; i++) if (rd[i]) valid[i] <= 1'b0;
      if (wr) begin
        if (!valid[0] || rd[0]) begin
          valid[0] <= 1'b1;
          data[0]  <= word;
        end else if (!valid[1] || rd[1]) begin
          valid[1] <= 1'b1;
          data[1]  <= word;
        end else begin
          lost <= 1'b1;
        end
      end
    end
  end

  a_rd_valid: assert property (@(posedge clk160) disable iff (!rst_n)
    (rd[0] |-> valid[0]) and (rd[1] |-> valid[1]));
endmodule
