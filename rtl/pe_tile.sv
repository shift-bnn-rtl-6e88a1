// pe_tile: the 4x4 tile of PEs in one SPU (RC-dimension mapping).
//
// PE p sits at row p / 4, column p % 4 and computes output neuron (row,
// column) of the current 4x4 output tile. Neurons move one PE to the left
// (from the right neighbour; column 3 is fed by the shift-unit array) or one
// PE up (from the PE below; row 3 is fed by the neuron buffer). The weight
// is one value broadcast to the tile in convolutional layers or one value
// per PE in FC layers; the crossbar supplies w[p] either way.
//
// Interface:
//   shift / op           move and compute operation for every PE this cycle
//   right_in[r]          Nout of shift-unit array column 0, row r
//   bottom_in[c]         neuron-buffer word for row 3, column c (SH_UP)
//   load[p], load_en[p]  broadcast / direct load value for PE p
//   w[p]                 weight used by PE p
//   psum[c], psum_row    partial sums of one PE row for PE_PSUM
//   out[p], acc[p]       PE results (Q8.8 after optional ReLU / raw)
// Timing: as for pe; everything acts at the clock edge.
//
// Follows the paper: a 4x4 tile of PEs numbered 0..15 row by row, neurons
// shifted to the left or up neighbour. Sizes are the paper's.
module pe_tile
  import sbnn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  shift_e  shift,
  input  pe_op_e  op,
  input  data_t   right_in  [TILE],
  input  data_t   bottom_in [TILE],
  input  data_t   load      [NPE],
  input  logic    load_en   [NPE],
  input  data_t   w         [NPE],
  input  data_t   psum      [TILE],
  input  logic [1:0] psum_row,
  input  logic    relu,
  output data_t   out       [NPE],
  output acc_t    acc       [NPE]
);

  data_t nout [NPE];

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    localparam int R = p / TILE;
    localparam int C = p % TILE;
    data_t fr, fb;
    if (C == TILE - 1) begin : g_re
      assign fr = right_in[R];
    end else begin : g_ri
      assign fr = nout[p + 1];
    end
    if (R == TILE - 1) begin : g_be
      assign fb = bottom_in[C];
    end else begin : g_bi
      assign fb = nout[p + TILE];
    end
    pe u_pe (
      .clk, .rst_n,
      .shift, .from_right(fr), .from_below(fb), .load(load[p]), .load_en(load_en[p]),
      .nout(nout[p]),
      .op, .w(w[p]), .psum(psum[C]), .psum_sel(psum_row == 2'(R)), .relu,
      .acc(acc[p]), .out(out[p])
    );
  end

endmodule
