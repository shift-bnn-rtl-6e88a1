// shift_unit: neuron shifting cell of the RC-dimension (output-map) dataflow.
//
// Each cell of the PE tile and of the shift-unit array holds two neuron
// registers. Reg-H is the neuron the cell currently offers to its PE and the
// one passed to the left neighbour; Reg-V keeps the neuron the cell received
// at the start of the current kernel row and is the one passed to the
// neighbour above. A multiplexer chooses the cell's new input (Nin) from the
// neighbour on the right, the neighbour below, the buffer (bottom row) or a
// broadcast value, and a second multiplexer chooses which register is sent
// out (Nout) according to the same shift mode.
//
//   SH_LEFT         Reg-H <= Nin from the right neighbour; Reg-V kept
//   SH_UP           Reg-H, Reg-V <= Nout (Reg-V) of the cell below
//                   (the bottom row gets the buffer word on 'from_below')
//   SH_BCAST/LOADV  Reg-H, Reg-V <= 'load' (broadcast or per-cell load)
//   SH_HOLD         no change
// Nout is Reg-H in SH_LEFT and Reg-V in every other mode, so one wire per
// neighbour carries whichever value the move needs.
//
// Timing: registers change at the clock edge of the cycle the mode is
// given; 'nin' (= Reg-H) is the value the PE uses in the next cycle.
//
// Follows the paper: the Nin multiplexer, Reg-H, Reg-V and the Nout
// multiplexer of Fig. 9(c) and "shift to the left (or up) neighbour". This
// design's choice: what Reg-V holds (the neuron of the kernel-row start,
// so an upward move needs no reload) and the mode encoding.
module shift_unit
  import sbnn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  shift_e  mode,
  input  data_t   from_right,  // Nout of the right neighbour
  input  data_t   from_below,  // Nout of the neighbour below (or buffer word)
  input  data_t   load,        // broadcast / direct load value
  input  logic    load_en,     // this cell takes 'load' in SH_LOADV_* modes
  output data_t   nin,         // neuron offered to the PE (Reg-H)
  output data_t   nout         // neuron sent to the left / upper neighbour
);

  data_t reg_h, reg_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_h <= '0;
      reg_v <= '0;
    end else begin
      unique case (mode)
        SH_LEFT:  reg_h <= from_right;
        SH_UP: begin
          reg_h <= from_below;
          reg_v <= from_below;
        end
        SH_BCAST: begin
          reg_h <= load;
          reg_v <= load;
        end
        SH_LOADV_LO, SH_LOADV_HI: begin
          if (load_en) begin
            reg_h <= load;
            reg_v <= load;
          end
        end
        default: ;
      endcase
    end
  end

  assign nin  = reg_h;
  assign nout = (mode == SH_LEFT) ? reg_h : reg_v;

endmodule
