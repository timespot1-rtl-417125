// i2c_target: slow-control target for an I2C-style bus (7-bit device
// address, 16-bit register pointer, auto-increment), oversampled by the
// system clock (clk must be at least ~20x the SCL rate).
//
// Write:  S  addr+W  A  ptr[15:8]  A  ptr[7:0]  A  data0 A  data1 A ... P
//         data bytes go to ptr, ptr+1, ...
// Read:   S  addr+W  A  ptr[15:8] A ptr[7:0] A  Sr  addr+R  A  d0 (master A)
//         d1 ... (master NACK)  P        - bytes come from ptr, ptr+1, ...
// SDA is open drain: sda_oe = 1 pulls the line low.  The target drives SDA
// only while SCL is low (changes are made on detected SCL falling edges), and
// samples on detected SCL rising edges.  START and STOP are SDA edges while
// SCL is high.  Register access: wr_en pulses one clk cycle with wr_addr /
// wr_data; rd_addr is the pointer, and rd_data must be its content
// (combinational read of the register file).
//
// The chip description only names an I2C slow control. The device address,
// the 16-bit pointer with auto-increment and the oversampled implementation
// are this design's own.
module i2c_target #(
  parameter logic [6:0] DEV_ADDR = 7'h2A
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        scl,
  input  logic        sda_in,
  output logic        sda_oe,
  output logic        wr_en,
  output logic [15:0] wr_addr,
  output logic [7:0]  wr_data,
  output logic [15:0] rd_addr,
  input  logic [7:0]  rd_data
);
  timeunit 1ps;
  timeprecision 1ps;

  typedef enum logic [2:0] {S_IDLE, S_ADDR, S_RX, S_ACK, S_TX, S_MACK} state_t;
  state_t state;

  logic [2:0] scl_s, sda_s;
  logic scl_rise, scl_fall, start_c, stop_c;
  logic [7:0] sh, txsh;
  logic [3:0] bitcnt;
  logic [1:0] byte_idx;  // 0: ptr hi, 1: ptr lo, 2: data
  logic rw, nack;
  logic [15:0] ptr;

  assign scl_rise = scl_s[1] & ~scl_s[2];
  assign scl_fall = ~scl_s[1] & scl_s[2];
  assign start_c  = scl_s[1] & scl_s[2] & ~sda_s[1] & sda_s[2];
  assign stop_c   = scl_s[1] & scl_s[2] & sda_s[1] & ~sda_s[2];
  assign rd_addr  = ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scl_s <= '1;
      sda_s <= '1;
    end else begin
      scl_s <= {scl_s[1:0], scl};
      sda_s <= {sda_s[1:0], sda_in};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      sda_oe   <= 1'b0;
      sh       <= '0;
      txsh     <= '0;
      bitcnt   <= '0;
      byte_idx <= '0;
      rw       <= 1'b0;
      nack     <= 1'b0;
      ptr      <= '0;
      wr_en    <= 1'b0;
      wr_addr  <= '0;
      wr_data  <= '0;
    end else begin
      wr_en <= 1'b0;
      if (start_c) begin
        state    <= S_ADDR;
        bitcnt   <= '0;
        byte_idx <= '0;
        sda_oe   <= 1'b0;
      end else if (stop_c) begin
        state  <= S_IDLE;
        sda_oe <= 1'b0;
      end else begin
        case (state)
          S_ADDR, S_RX: begin
            if (scl_rise && bitcnt != 4'd8) begin
              sh     <= {sh[6:0], sda_s[1]};
              bitcnt <= bitcnt + 1'b1;
            end
            if (scl_fall && bitcnt == 4'd8) begin
              bitcnt <= '0;
              if (state == S_ADDR) begin
                if (sh[7:1] == DEV_ADDR) begin
                  rw     <= sh[0];
                  sda_oe <= 1'b1;
                  state  <= S_ACK;
                end else begin
                  state  <= S_IDLE;
                end
              end else begin
                case (byte_idx)
                  2'd0: begin ptr[15:8] <= sh; byte_idx <= 2'd1; end
                  2'd1: begin ptr[7:0]  <= sh; byte_idx <= 2'd2; end
                  default: begin
                    wr_en   <= 1'b1;
                    wr_addr <= ptr;
                    wr_data <= sh;
                    ptr     <= ptr + 1'b1;
                  end
                endcase
                rw     <= 1'b0;
                sda_oe <= 1'b1;
                state  <= S_ACK;
              end
            end
          end
          S_ACK: if (scl_fall) begin
            if (rw) begin
              txsh   <= rd_data;
              sda_oe <= ~rd_data[7];
              bitcnt <= 4'd1;
              state  <= S_TX;
            end else begin
              sda_oe <= 1'b0;
              bitcnt <= '0;
              state  <= S_RX;
            end
          end
          S_TX: if (scl_fall) begin
            if (bitcnt == 4'd8) begin
              sda_oe <= 1'b0;
              state  <= S_MACK;
            end else begin
              sda_oe <= ~txsh[3'd7 - bitcnt[2:0]];
              bitcnt <= bitcnt + 1'b1;
            end
          end
          S_MACK: begin
            if (scl_rise) begin
              nack <= sda_s[1];
              ptr  <= ptr + 1'b1;
            end
            if (scl_fall) begin
              if (nack) begin
                state <= S_IDLE;
              end else begin
                txsh   <= rd_data;
                sda_oe <= ~rd_data[7];
                bitcnt <= 4'd1;
                state  <= S_TX;
              end
            end
          end
          default: ;
        endcase
      end
    end
  end
endmodule
