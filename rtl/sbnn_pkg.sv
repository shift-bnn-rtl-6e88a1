// sbnn_pkg: shared constants, types and helper functions of the Shift-BNN
// training accelerator.
//
// Numbers: all operands are 16-bit two's-complement fixed point with 8
// fractional bits (Q8.8). The 16-bit width is the precision the accelerator
// is evaluated at; the split into integer and fraction bits is this design's
// choice. Products are kept at 32 bits (Q16.16) inside a PE and are brought
// back to Q8.8 with an arithmetic right shift and saturation on the way out.
//
// Micro-operations: the controller drives every SPU with the same
// micro-operation (uop_t) each cycle; the SPUs run in lock step on the
// samples assigned to them. A micro-operation is consumed over four pipeline
// stages inside the SPU (S0 buffer/GRNG request, S1 data arrives and the
// shift network moves, S2 the PE computes and the function units update,
// S3 results are written to the gradient buffer).
package sbnn_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned DW       = 16;   // data precision (paper: 16-bit)
  localparam int unsigned FRAC     = 8;    // fraction bits (assumed Q8.8)
  localparam int unsigned ACCW     = 32;   // PE accumulator width
  localparam int unsigned TILE     = 4;    // PE tile is TILE x TILE
  localparam int unsigned NPE      = TILE * TILE;   // PEs = GRNG slices per SPU
  localparam int unsigned NCOL     = 2 * TILE;      // PE columns + shift-unit columns
  localparam int unsigned NB_BANKS = NCOL;          // neuron-buffer banks (column interleaved)
  localparam int unsigned KCHUNK   = TILE + 1;      // kernel columns covered per refill
  localparam int unsigned LFSR_N   = 256;           // LFSR length (paper: 256-bit)
  localparam int unsigned NBAW     = 13;            // neuron-buffer bank address width
  localparam int unsigned WAW      = 12;            // WPB / gradient-buffer entry address width
  localparam int unsigned DIMW     = 10;            // width of map sizes and coordinates
  localparam int unsigned CHW      = 10;            // width of channel counts

  typedef logic signed [DW-1:0]   data_t;
  typedef logic signed [ACCW-1:0] acc_t;

  // ------------------------------------------------------------ GRNG mode
  typedef enum logic [1:0] {
    GRNG_IDLE = 2'd0,   // registers keep their value
    GRNG_FWD  = 2'd1,   // shift right, new R1 from the forward taps
    GRNG_BWD  = 2'd2    // shift left, new Rn from the reverse taps
  } grng_mode_e;

  // ------------------------------------------------- shift network moves
  typedef enum logic [2:0] {
    SH_HOLD     = 3'd0,
    SH_UP       = 3'd1,  // every unit takes Reg-V of the unit below; bottom row from the buffer
    SH_LEFT     = 3'd2,  // every unit takes Reg-H of the unit to its right
    SH_BCAST    = 3'd3,  // every unit takes the same broadcast neuron
    SH_LOADV_LO = 3'd4,  // PE p (p < 8) takes buffer lane p
    SH_LOADV_HI = 3'd5   // PE p (p >= 8) takes buffer lane p-8
  } shift_e;

  // -------------------------------------------------------- PE operation
  typedef enum logic [2:0] {
    PE_NOP  = 3'd0,
    PE_MUL  = 3'd1,  // acc <= w * nin                (start of an accumulation)
    PE_MAC  = 3'd2,  // acc <= acc + w * nin          (forward mode: register feedback)
    PE_PSUM = 3'd3,  // acc <= psum << FRAC           (backward mode: psum from NBout), one PE row
    PE_MAXF = 3'd4,  // acc <= nin << FRAC            (first element of a max window)
    PE_MAX  = 3'd5   // acc <= max(acc, nin << FRAC)
  } pe_op_e;

  // --------------------------------------------------- weight selection
  typedef enum logic [1:0] {
    W_SAMP_BCAST = 2'd0,  // sampled weight of slice 0, broadcast to all PEs (conv)
    W_SAMP_LANE  = 2'd1,  // PE p takes the sampled weight of slice p (FC)
    W_NB_ELEM    = 2'd2   // one neuron read from a buffer used as the weight (GC)
  } wsel_e;

  // ------------------------------------------ neuron-buffer read request
  // Reads NB_BANKS consecutive neurons (y, x0 .. x0+NB_BANKS-1) of a map
  // stored at 'base' with 'pitch' words per row in each bank. Out-of-map
  // coordinates (padding) read as zero.
  typedef struct packed {
    logic                   en;
    logic                   sel;    // 0: NBin, 1: NBout
    logic [NBAW-1:0]        base;
    logic [NBAW-1:0]        pitch;  // bank words per map row = ceil(w / NB_BANKS)
    logic signed [DIMW:0]   y;
    logic signed [DIMW:0]   x0;
    logic [DIMW-1:0]        h;
    logic [DIMW-1:0]        w;
  } nb_rd_t;

  // ----------------------------------------- neuron-buffer write request
  // Writes PE row 'row' (TILE neurons, columns x0 .. x0+TILE-1 of map row y).
  // With sub = 1 only even coordinates are kept and stored at (y/2, x/2).
  typedef struct packed {
    logic                   en;
    logic                   sel;
    logic [NBAW-1:0]        base;
    logic [NBAW-1:0]        pitch;
    logic [DIMW-1:0]        y;
    logic [DIMW-1:0]        x0;
    logic [DIMW-1:0]        h;      // valid rows / columns of the (unsubsampled) output
    logic [DIMW-1:0]        w;
    logic [1:0]             row;
    logic                   relu;
    logic                   sub;
  } nb_wr_t;

  // ---------------------------------- WPB / gradient-buffer read request
  typedef struct packed {
    logic                   en;
    logic                   all;    // FC: every lane at 'addr'; conv: lane 'lane' only
    logic [WAW-1:0]         addr;
    logic [3:0]             lane;
  } wb_rd_t;

  // -------------------------------------- gradient-buffer write request
  // all = 1 (FC): lane p <- PE p at entry addr.
  // all = 0 (conv): PE row 'row', columns 0 .. ncol-1 go to linear indices j0 ..
  typedef struct packed {
    logic                   en;
    logic                   all;
    logic [WAW-1:0]         addr;
    logic [WAW+3:0]         j0;
    logic [2:0]             ncol;
    logic [1:0]             row;
  } gb_wr_t;

  // ------------------------------------------------------ micro-operation
  typedef struct packed {
    nb_rd_t      rda;        // row read (shift network / psum)
    nb_rd_t      rdb;        // single-neuron read (broadcast neuron or GC weight)
    shift_e      shift;      // S1
    pe_op_e      pe_op;      // S2
    logic [1:0]  psum_row;   // S2
    wsel_e       wsel;       // S1/S2
    logic        grng_fwd;   // S0: step the enabled GRNGs forward
    logic        grng_bwd;   // S1: step the enabled GRNGs backward
    logic        grng_all;   // all slices (FC) instead of slice 0 (conv)
    wb_rd_t      wrd;        // S0: WPB and gradient-buffer read
    logic        upd;        // S2: DPU/updater result is written back to WPB
    nb_wr_t      nbw;        // S3: neuron-buffer write from the PE tile
    gb_wr_t      gbw;        // S3: gradient-buffer write from the PE tile
  } uop_t;

  // ------------------------------------------------------- instructions
  typedef enum logic [2:0] {
    OP_CONV_FW = 3'd0,
    OP_CONV_BW = 3'd1,
    OP_CONV_GC = 3'd2,
    OP_FC_FW   = 3'd3,
    OP_FC_BW   = 3'd4,
    OP_FC_GC   = 3'd5,
    OP_POOL    = 3'd6
  } op_e;

  // One layer-stage instruction. Map sizes are those of the source map
  // (src_h x src_w); the controller derives the destination size.
  typedef struct packed {
    op_e                 op;
    logic [2:0]          k;        // kernel / pool window size, 1..5
    logic [2:0]          pad;      // zero padding of the source map
    logic [CHW-1:0]      ci;       // source channels (FC: input vector length)
    logic [CHW-1:0]      co;       // destination channels (FC: output vector length)
    logic [DIMW-1:0]     src_h;
    logic [DIMW-1:0]     src_w;
    logic                src_sel;  // buffer holding the source map (0 NBin, 1 NBout)
    logic [NBAW-1:0]     src_base;
    logic                dst_sel;
    logic [NBAW-1:0]     dst_base;
    logic                aux_sel;  // GC: buffer holding the errors; FC-GC: the error vector
    logic [NBAW-1:0]     aux_base;
    logic [DIMW-1:0]     aux_h;    // GC: error map size
    logic [DIMW-1:0]     aux_w;
    logic [WAW+3:0]      w_base;   // linear weight index of the layer's first weight
    logic [WAW+3:0]      g_base;   // linear index in the gradient buffer (= w_base of the layer)
    logic                relu;     // apply ReLU when writing forward outputs
    logic                update;   // BW: update mu/sigma while weights are regenerated
  } instr_t;

  // ---------------------------------------------------------- functions
  function automatic data_t sat16(input logic signed [ACCW+1:0] v);
    if (v > $signed({{(ACCW+2-DW){1'b0}}, {1'b0, {(DW-1){1'b1}}}}))
      return {1'b0, {(DW-1){1'b1}}};
    else if (v < $signed({{(ACCW+2-DW){1'b1}}, {1'b1, {(DW-1){1'b0}}}}))
      return {1'b1, {(DW-1){1'b0}}};
    else
      return v[DW-1:0];
  endfunction

  // Q16.16 accumulator to Q8.8 neuron, saturating.
  function automatic data_t acc_to_data(input acc_t a);
    logic signed [ACCW+1:0] s;
    s = $signed({{2{a[ACCW-1]}}, a}) >>> FRAC;
    return sat16(s);
  endfunction

  // Fixed-point product w * x (both Q8.8) in Q8.8, saturating.
  function automatic data_t qmul(input data_t a, input data_t b);
    logic signed [2*DW-1:0] p;
    p = a * b;
    return sat16($signed({{(ACCW+2-2*DW){p[2*DW-1]}}, p}) >>> FRAC);
  endfunction

  // Saturating Q8.8 addition.
  function automatic data_t qadd(input data_t a, input data_t b);
    return sat16({{(ACCW+2-DW){a[DW-1]}}, a} + {{(ACCW+2-DW){b[DW-1]}}, b});
  endfunction

  // Seed of GRNG slice 'slice' in SPU 'spu'. Every slice of every SPU gets a
  // different non-zero 256-bit pattern (a 32-bit multiplicative hash of the
  // indices, repeated with rotation).
  function automatic logic [LFSR_N-1:0] grng_seed(input int unsigned spu, input int unsigned slice);
    logic [31:0] h;
    logic [LFSR_N-1:0] s;
    h = 32'h9E37_79B9 * (32'(spu) * 32'd17 + 32'(slice) + 32'd1);
    for (int i = 0; i < LFSR_N / 32; i++) begin
      s[i*32 +: 32] = ((h << i) | (h >> (32 - i))) ^ (32'(i) * 32'h0101_0101);
    end
    return s;
  endfunction

endpackage
