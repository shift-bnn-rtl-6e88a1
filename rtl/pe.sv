// pe: processing element of the 4x4 PE tile.
//
// The right half is a shift_unit that supplies the input neuron (Nin). The
// left half multiplies Nin with the weight broadcast to the tile (or the
// PE's own weight in FC layers) and accumulates the product in a 32-bit
// register. A multiplexer in front of the adder selects what the product is
// added to, which gives the two accumulation modes of the design:
//   PE_MAC   the PE's own register (forward stage: the partial sum stays in
//            the PE while the kernels of all input channels are applied)
//   PE_PSUM  a partial sum read back from NBout (backward stage: the partial
//            sum of an output neuron is fetched, accumulated, and written
//            back between kernels). The read-back value is loaded into the
//            register; the following PE_MAC ops then add to it.
//   PE_MUL   nothing (first product of a new output neuron)
// PE_MAXF / PE_MAX compare instead of multiply (CMP, max pooling).
// 'out' is the register converted to Q8.8 with saturation, passed through a
// ReLU when 'relu' is set.
//
// Timing: 'op', 'w' and the Nin register are used in the same cycle; the
// accumulator changes at the clock edge. The shift-unit half acts on
// 'shift' at the same edge, so the Nin a PE uses is the one moved into it one
// cycle earlier.
//
// Follows the paper: multiplier, adder, CMP, output register, the
// compute-mode multiplexer choosing between register feedback and psum, and
// ReLU/max pooling in the PE. This design's choice: a 32-bit accumulator and
// loading the psum into the register rather than adding it in the same cycle
// as a product.
module pe
  import sbnn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  // shift half
  input  shift_e  shift,
  input  data_t   from_right,
  input  data_t   from_below,
  input  data_t   load,
  input  logic    load_en,
  output data_t   nout,
  // compute half
  input  pe_op_e  op,
  input  data_t   w,
  input  data_t   psum,
  input  logic    psum_sel,    // this PE takes 'psum' in PE_PSUM
  input  logic    relu,
  output acc_t    acc,
  output data_t   out
);

  data_t nin;

  shift_unit u_shift (
    .clk, .rst_n, .mode(shift), .from_right, .from_below, .load, .load_en,
    .nin, .nout
  );

  acc_t prod, nin_acc, acc_q, addend;
  assign prod    = ACCW'(w * nin);
  assign nin_acc = ACCW'(nin) <<< FRAC;

  // compute-mode multiplexer: what the product is added to
  always_comb begin
    unique case (op)
      PE_MAC:  addend = acc_q;
      default: addend = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0;
    end else begin
      unique case (op)
        PE_MUL, PE_MAC: acc_q <= addend + prod;
        PE_PSUM:        if (psum_sel) acc_q <= ACCW'(psum) <<< FRAC;
        PE_MAXF:        acc_q <= nin_acc;
        PE_MAX:         if (nin_acc > acc_q) acc_q <= nin_acc;
        default: ;
      endcase
    end
  end

  data_t q;
  assign q   = acc_to_data(acc_q);
  assign out = (relu && q < 0) ? '0 : q;
  assign acc = acc_q;

endmodule
