// rot_fifo: synchronous FIFO, DEPTH words of W bits (32 x 40 in the chip),
// one clock (clk160).  Write when wr_en and not full; read pops the word shown
// on rd_data (first-word fall-through: rd_data is the oldest word whenever
// empty is low).  Pointers carry one extra bit to tell full from empty.
// Writing when full and reading when empty are errors (asserted) and ignored.
//
// From the chip description: 32 words of 40 bits. Own choice: first-word
// fall-through organisation.
module rot_fifo #(
  parameter int unsigned W     = 40,
  parameter int unsigned DEPTH = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         full,
  output logic         empty,
  output logic [$clog2(DEPTH):0] count
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign count   = wp - rp;
  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (wp == rp);
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full)  wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);
endmodule
