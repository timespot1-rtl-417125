// link_rx_model: receiver used by the testbenches for one serial link.
// It samples the DDR output 200 ps after each clk640 edge, frames bytes on
// the clk640 edge that leaves the transmitter's phase counter ph640 at 1 (the
// edge at which the serializer loads a byte) and parses the byte stream: the idle byte
// is counted, the header byte starts a 5-byte (40-bit) hit word, which is
// pushed on the queue `words`.  A byte that is neither header nor idle
// outside a word is counted in `n_junk`.  The bytes that follow a header
// are taken as data whatever their value.
module link_rx_model (
  input logic       clk640,
  input logic [1:0] ph640,
  input logic       dout,
  input logic [7:0] header,
  input logic [7:0] idle
);
  timeunit 1ps;
  timeprecision 1fs;

  logic [7:0]  raw [$];          // every byte received
  logic [39:0] words [$];
  realtime     t_words [$];      // arrival time of the last bit of each word
  int          n_bytes = 0, n_idle = 0, n_header = 0, n_junk = 0;
  logic [7:0]  cur = '0;
  int          nb = -1;           // bits of the current byte; -1 before framing
  int          left = 0;          // data bytes still expected
  logic [39:0] w = '0;

  task automatic take_byte(input logic [7:0] b);
    n_bytes++;
    raw.push_back(b);
    if (left != 0) begin
      w = {w[31:0], b};
      left--;
      if (left == 0) begin
        words.push_back(w);
        t_words.push_back($realtime);
      end
    end else if (b == header) begin
      n_header++;
      left = 5;
    end else if (b == idle) begin
      n_idle++;
    end else begin
      n_junk++;
    end
  endtask

  always @(posedge clk640) begin
    #200;
    if (ph640 == 2'd1) nb = 0;       // the serializer loaded a byte at this edge
    if (nb >= 0) begin
      cur = {cur[6:0], dout};
      nb++;
    end
  end

  always @(negedge clk640) begin
    #200;
    if (nb >= 0) begin
      cur = {cur[6:0], dout};
      nb++;
      if (nb == 8) begin
        take_byte(cur);
        nb = -2;                     // wait for the next boundary
      end
    end
  end
endmodule
