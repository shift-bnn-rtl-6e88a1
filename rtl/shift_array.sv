// shift_array: the 4x4 array of shift units beside the PE tile.
//
// The array continues the PE tile to the right: its column 0 feeds PE
// column 3, so during the left shifts of one kernel row the PEs are supplied
// with the next four neurons of each map row without a buffer read (a
// kernel up to five columns wide is covered by one refill). Its bottom row
// is filled from neuron-buffer banks 4..7 on an upward shift, together with
// the PE tile's bottom row from banks 0..3. Column 3 of the array takes zero
// on a left shift.
//
// Interface: 'shift' as in shift_unit; bottom_in[c] is the buffer word for
// row 3, column c of the array; bcast is loaded into every cell on SH_BCAST;
// left_out[r] is the Nout of column 0, row r (to PE column 3).
// Timing: registers change at the clock edge of the cycle 'shift' is given.
//
// Follows the paper: 4x4 array organised like the PE tile, each cell the
// same as the right half of a PE, storing the candidate neurons the tile
// needs in the next four cycles, in place of a column buffer. The buffer
// feeding of the bottom row is this design's choice. The shift units' Nin
// outputs are collected but unused here: the PE tile takes its neurons from
// 'left_out', so lint reports 'nin' as unused; that is expected.
module shift_array
  import sbnn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  shift_e  shift,
  input  data_t   bottom_in [TILE],
  input  data_t   bcast,
  output data_t   left_out  [TILE]
);

  data_t nout [NPE];
  data_t nin  [NPE];

  for (genvar p = 0; p < NPE; p++) begin : g_su
    localparam int R = p / TILE;
    localparam int C = p % TILE;
    data_t fr, fb;
    if (C == TILE - 1) begin : g_re
      assign fr = '0;
    end else begin : g_ri
      assign fr = nout[p + 1];
    end
    if (R == TILE - 1) begin : g_be
      assign fb = bottom_in[C];
    end else begin : g_bi
      assign fb = nout[p + TILE];
    end
    shift_unit u_su (
      .clk, .rst_n, .mode(shift), .from_right(fr), .from_below(fb),
      .load(bcast), .load_en(1'b0), .nin(nin[p]), .nout(nout[p])
    );
  end

  for (genvar r = 0; r < TILE; r++) begin : g_out
    assign left_out[r] = nout[r * TILE];
  end

endmodule
