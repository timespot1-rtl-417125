// tx_protocol: link framing.  One byte per clk160 cycle.  When a 40-bit word
// waits at the FIFO output it is sent as a header byte followed by its five
// bytes, most significant first (address byte, then TDC word and timestamp);
// otherwise the idle byte is sent.  Header and idle values come from the
// slow control.  The FIFO word is popped in the cycle the header goes out,
// so words follow each other without gaps: 6 cycles per hit, i.e. at most
// 26.7 M hits/s per link.
//
// From the chip description: a header byte and five data bytes per word, an
// idle byte otherwise, both programmable. Own choice: reset values 0xB5 /
// 0x3C.
module tx_protocol
  import ts1_pkg::*;
(
  input  logic             clk160,
  input  logic             rst_n,
  input  logic [7:0]       header,
  input  logic [7:0]       idle,
  input  logic             fifo_empty,
  input  logic [HIT_W-1:0] fifo_data,
  output logic             fifo_rd,
  output logic [7:0]       tx_byte,
  output logic             tx_is_header
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [HIT_W-1:0] word;
  logic [2:0]       left;   // data bytes still to send

  assign fifo_rd = (left == 3'd0) && !fifo_empty;

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      word         <= '0;
      left         <= '0;
      tx_byte      <= 8'h00;
      tx_is_header <= 1'b0;
    end else begin
      tx_is_header <= 1'b0;
      if (left != 3'd0) begin
        tx_byte <= word[HIT_W-1 -: 8];
        word    <= {word[HIT_W-9:0], 8'h00};
        left    <= left - 1'b1;
      end else if (!fifo_empty) begin
        tx_byte      <= header;
        tx_is_header <= 1'b1;
        word         <= fifo_data;
        left         <= 3'd5;
      end else begin
        tx_byte <= idle;
      end
    end
  end
endmodule
