// crossbar: data routing between the buffers, the GRNG/function-unit slices
// and the PE tile inside one SPU (purely combinational).
//
// Routes, by pipeline stage of the micro-operation that uses them:
//   S1  row      eight neurons of the row read (NBin or NBout, uop.rda.sel)
//                -> bottom rows of PE tile (lanes 0..3) and shift array (4..7)
//       bcast    neuron 0 of the single-neuron read (uop.rdb.sel)
//       load[p]  row-read lane p (PEs 0..7) or p-8 (PEs 8..15) for SH_LOADV_*
//       slice inputs mu/sigma/dw: slice p takes WPB/gradient-buffer lane p;
//                in a convolution slice 0 takes lane uop.wrd.lane
//   S2  w[p]     sampled weight of slice 0 (conv), of slice p (FC), or the
//                registered single neuron (GC: errors used as weights)
//       psum[c]  registered row read, columns 0..3
//   S2  dmu/dsigma lanes: FC lane p from slice p; conv lane 'lane' from slice 0
//   S3  nb_wdata PE row uop.nbw.row
//       gb lanes conv: PE row uop.gbw.row, column c -> linear index j0 + c;
//                FC: lane p <- PE p at entry uop.gbw.addr
//
// Follows the paper: a crossbar between WPB, NBin, NBout and the PE tile
// that picks one weight parameter per cycle for a convolution and passes a
// whole entry for an FC layer; NBout can stand in for the WPB during the
// gradient calculation. The routing table itself is this design's.
// The whole micro-operation of each stage is passed in, but each stage
// uses only its own fields, so lint lists the other bits of s1/s2/s3 as
// unused; that is expected.
module crossbar
  import sbnn_pkg::*;
(
  // S1 side
  input  uop_t   s1,
  input  data_t  nbin_rd  [NB_BANKS],
  input  data_t  nbout_rd [NB_BANKS],
  input  data_t  wpb_mu   [NPE],
  input  data_t  wpb_sg   [NPE],
  input  data_t  gb_rd    [NPE],
  output data_t  row      [NB_BANKS],
  output data_t  bcast,
  output data_t  load     [NPE],
  output logic   load_en  [NPE],
  output data_t  fu_mu    [NPE],
  output data_t  fu_sg    [NPE],
  output data_t  fu_dw    [NPE],
  // S2 side
  input  uop_t   s2,
  input  data_t  w_samp_q [NPE],   // sampled weights registered at the end of S1
  input  data_t  elem_q,           // single neuron registered at the end of S1
  input  data_t  row_q    [NB_BANKS],
  input  data_t  fu_dmu   [NPE],   // updater outputs (valid in S2)
  input  data_t  fu_dsg   [NPE],
  input  logic   fu_vld   [NPE],
  output data_t  pe_w     [NPE],
  output data_t  psum     [TILE],
  output data_t  dmu      [NPE],
  output data_t  dsg      [NPE],
  output logic   dvld     [NPE],
  // S3 side
  input  uop_t   s3,
  input  data_t  pe_out   [NPE],
  output data_t  nb_wdata [TILE],
  output logic           gb_we    [NPE],
  output logic [WAW-1:0] gb_waddr [NPE],
  output data_t          gb_wdata [NPE]
);

  // ---------------------------------------------------------------- S1
  always_comb begin
    for (int l = 0; l < NB_BANKS; l++) row[l] = s1.rda.sel ? nbout_rd[l] : nbin_rd[l];
    bcast = s1.rdb.sel ? nbout_rd[0] : nbin_rd[0];
    for (int p = 0; p < NPE; p++) begin
      load[p]    = (s1.shift == SH_BCAST) ? bcast : row[p % NB_BANKS];
      load_en[p] = (s1.shift == SH_LOADV_LO) ? (p <  NB_BANKS) :
                   (s1.shift == SH_LOADV_HI) ? (p >= NB_BANKS) : 1'b0;
      fu_mu[p] = wpb_mu[p];
      fu_sg[p] = wpb_sg[p];
      fu_dw[p] = gb_rd[p];
    end
    if (!s1.wrd.all) begin
      fu_mu[0] = wpb_mu[s1.wrd.lane];
      fu_sg[0] = wpb_sg[s1.wrd.lane];
      fu_dw[0] = gb_rd[s1.wrd.lane];
    end
  end

  // ---------------------------------------------------------------- S2
  always_comb begin
    for (int p = 0; p < NPE; p++) begin
      unique case (s2.wsel)
        W_SAMP_LANE: pe_w[p] = w_samp_q[p];
        W_NB_ELEM:   pe_w[p] = elem_q;
        default:     pe_w[p] = w_samp_q[0];
      endcase
    end
    for (int c = 0; c < TILE; c++) psum[c] = row_q[c];
    for (int l = 0; l < NPE; l++) begin
      if (s2.wrd.all) begin
        dmu[l]  = fu_dmu[l];
        dsg[l]  = fu_dsg[l];
        dvld[l] = fu_vld[l];
      end else begin
        dmu[l]  = fu_dmu[0];
        dsg[l]  = fu_dsg[0];
        dvld[l] = fu_vld[0] && (s2.wrd.lane == 4'(l));
      end
    end
  end

  // ---------------------------------------------------------------- S3
  always_comb begin
    logic [WAW+3:0] j;
    j = '0;
    for (int c = 0; c < TILE; c++) nb_wdata[c] = pe_out[s3.nbw.row * TILE + c];
    for (int l = 0; l < NPE; l++) begin
      gb_we[l]    = 1'b0;
      gb_waddr[l] = s3.gbw.addr;
      gb_wdata[l] = pe_out[l];
    end
    if (s3.gbw.en && s3.gbw.all) begin
      for (int l = 0; l < NPE; l++) gb_we[l] = 1'b1;
    end else if (s3.gbw.en) begin
      for (int c = 0; c < TILE; c++) begin
        if (3'(c) < s3.gbw.ncol) begin
          j = s3.gbw.j0 + (WAW+4)'(c);
          gb_we[j[3:0]]    = 1'b1;
          gb_waddr[j[3:0]] = j[WAW+3:4];
          gb_wdata[j[3:0]] = pe_out[s3.gbw.row * TILE + c];
        end
      end
    end
  end

endmodule
