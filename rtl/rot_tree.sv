// rot_tree: combinational binary tree that picks one full cache entry out of
// N_LEAF (= 2 entries x 256 pixels) in one clk160 cycle.  Each node passes up
// the valid flag (OR of its children) and the index and data of its left
// child when that is valid, otherwise of its right child, so the leaf with
// the lowest index wins (fixed priority, like the token-less binary readout
// tree it follows).  The root gives the pixel address (leaf index / 2: the
// geographical coordinate of the pixel inside its group of 256) and the
// 32-bit TDC word + timestamp.  When `take` is high the selected leaf gets a
// one-hot free pulse in `grant`.  There is no register in the tree.
//
// From the chip description: a combinational binary tree that picks one full
// cache per 160 MHz cycle and forms the 8-bit address. Own choice: fixed
// priority to the lowest index.
module rot_tree
  import ts1_pkg::*;
#(
  parameter int unsigned N_PIX = 256
) (
  input  logic [2*N_PIX-1:0]       leaf_valid,
  input  tdc_ts_t                  leaf_data [2*N_PIX],
  input  logic                     take,
  output logic                     any_valid,
  output logic [PIX_ADDR_W-1:0]    addr,
  output tdc_ts_t                  data,
  output logic [2*N_PIX-1:0]       grant
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam int N    = 2 * N_PIX;
  localparam int LVLS = $clog2(N);
  localparam int NP   = 1 << LVLS;     // leaves padded to a power of two
  localparam int IW   = LVLS;

  // Node arrays in heap order: node 1 is the root, leaves are NP..2NP-1.
  logic            v   [2*NP];
  logic [IW-1:0]   idx [2*NP];
  tdc_ts_t         d   [2*NP];

  for (genvar i = 0; i < NP; i++) begin : g_leaf
    if (i < N) begin : g_real
      assign v[NP+i]   = leaf_valid[i];
      assign d[NP+i]   = leaf_data[i];
    end else begin : g_pad
      assign v[NP+i]   = 1'b0;
      assign d[NP+i]   = '0;
    end
    assign idx[NP+i] = IW'(i);
  end

  for (genvar n = NP - 1; n >= 1; n--) begin : g_node
    assign v[n]   = v[2*n] | v[2*n+1];
    assign idx[n] = v[2*n] ? idx[2*n] : idx[2*n+1];
    assign d[n]   = v[2*n] ? d[2*n]   : d[2*n+1];
  end

  assign v[0]   = 1'b0;
  assign idx[0] = '0;
  assign d[0]   = '0;

  assign any_valid = v[1];
  assign addr      = PIX_ADDR_W'(idx[1] >> 1);
  assign data      = d[1];

  always_comb begin
    grant = '0;
    if (take && v[1]) grant[idx[1]] = 1'b1;
  end
endmodule
