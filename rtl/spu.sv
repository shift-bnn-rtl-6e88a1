// spu: Sample Processing Unit. Each SPU trains one sampled model: it holds
// that sample's feature maps and errors and its own Gaussian random numbers,
// while the weight parameters (mu, sigma) come from the shared WPB.
//
// Contents: NBin and NBout (nbuf), 16 GRNG slices each with its function
// units (grng + func_unit), the 4x4 PE tile, the 4x4 shift-unit array, the
// crossbar and a gradient buffer that keeps the likelihood gradients of the
// gradient-calculation (GC) stage until the backward pass regenerates the
// weights and the updater needs them.
//
// Every SPU executes the same micro-operation stream (uop, stage S0) from
// the controller. The SPU delays it internally:
//   S0  buffer reads issued (rda, rdb, WPB/GB entry), forward GRNG step
//   S1  read data and eps available: shift network moves, sampler forms the
//       weight, backward GRNG step, updater captures dmu/dsigma (uop.upd)
//   S2  PE operation with the registered weight; dmu/dsigma lanes out
//   S3  writes of PE results to NBin/NBout or the gradient buffer
// In a convolution only GRNG slice 0 steps; in an FC layer all 16 do.
//
// Ports: uop is the controller's micro-operation in S0; wpb_mu/wpb_sg are
// the WPB lanes of the entry requested in S0, valid in S1; dmu/dsg/dvld are
// the gradient lanes, valid in S2; host_* gives the external memory access
// to the two neuron buffers (host_sel 0 = NBin, 1 = NBout; read data on
// host_rdata two cycles after host_re).
//
// Follows the paper's SPU of Fig. 9(a). This design's choices: the pipeline
// staging, the gradient buffer (the paper does not say where the GC-stage
// gradient is kept) and the GRNG seeds. The GRNG 'pattern' output is left
// unconnected on purpose: it exists for testing the GRNG alone and nothing
// in the SPU needs the raw LFSR state. Likewise the PE accumulators
// (pe_acc) are only observed by tests, and lint reports them as unused.
module spu
  import sbnn_pkg::*;
#(
  parameter int unsigned SPU_ID   = 0,
  parameter int unsigned NB_DEPTH = 6144,
  parameter int unsigned GB_DEPTH = 4096
) (
  input  logic            clk,
  input  logic            rst_n,
  input  uop_t            uop,
  input  data_t           wpb_mu [NPE],
  input  data_t           wpb_sg [NPE],
  output data_t           dmu    [NPE],
  output data_t           dsg    [NPE],
  output logic            dvld   [NPE],
  input  logic            host_we,
  input  logic            host_re,
  input  logic            host_sel,
  input  logic [2:0]      host_bank,
  input  logic [NBAW-1:0] host_addr,
  input  data_t           host_wdata,
  output data_t           host_rdata
);

  // ------------------------------------------------------- stage registers
  uop_t s1, s2, s3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      s2 <= '0;
      s3 <= '0;
    end else begin
      s1 <= uop;
      s2 <= s1;
      s3 <= s2;
    end
  end

  // ------------------------------------------------------------- buffers
  nb_rd_t rd_in, rd_out;
  nb_wr_t wr_in, wr_out;
  data_t  nbin_rd [NB_BANKS], nbout_rd [NB_BANKS];
  data_t  nb_wdata [TILE];

  always_comb begin
    rd_in  = '0;
    rd_out = '0;
    if (uop.rda.en) begin
      if (uop.rda.sel) rd_out = uop.rda; else rd_in = uop.rda;
    end
    if (uop.rdb.en) begin
      if (uop.rdb.sel) rd_out = uop.rdb; else rd_in = uop.rdb;
    end
    wr_in  = s3.nbw;
    wr_out = s3.nbw;
    wr_in.en  = s3.nbw.en && !s3.nbw.sel;
    wr_out.en = s3.nbw.en &&  s3.nbw.sel;
  end

  nbuf #(.DEPTH(NB_DEPTH)) u_nbin (
    .clk, .rd(rd_in), .rdata(nbin_rd), .wr(wr_in), .wdata(nb_wdata),
    .host_we(host_we && !host_sel), .host_re(host_re && !host_sel),
    .host_bank, .host_addr, .host_wdata
  );
  nbuf #(.DEPTH(NB_DEPTH)) u_nbout (
    .clk, .rd(rd_out), .rdata(nbout_rd), .wr(wr_out), .wdata(nb_wdata),
    .host_we(host_we && host_sel), .host_re(host_re && host_sel),
    .host_bank, .host_addr, .host_wdata
  );

  logic host_sel_q;
  always_ff @(posedge clk) begin
    host_sel_q <= host_sel;
    host_rdata <= host_sel_q ? nbout_rd[0] : nbin_rd[0];
  end

  // gradient buffer
  data_t          gb_rd [NPE];
  logic           gb_we [NPE];
  logic [WAW-1:0] gb_waddr [NPE];
  data_t          gb_wdata [NPE];
  lane_mem #(.DEPTH(GB_DEPTH)) u_gbuf (
    .clk, .raddr(uop.wrd.addr), .rdata(gb_rd), .we(gb_we), .waddr(gb_waddr), .wdata(gb_wdata)
  );

  // ------------------------------------------------- crossbar (S1/S2/S3)
  data_t row [NB_BANKS];
  data_t bcast;
  data_t load [NPE];
  logic  load_en [NPE];
  data_t fu_mu [NPE], fu_sg [NPE], fu_dw [NPE];
  data_t w_samp [NPE], w_samp_q [NPE];
  data_t elem_q;
  data_t row_q [NB_BANKS];
  data_t fu_dmu [NPE], fu_dsg [NPE];
  logic  fu_vld [NPE];
  data_t pe_w [NPE];
  data_t psum [TILE];
  data_t pe_out [NPE];
  acc_t  pe_acc [NPE];

  crossbar u_xbar (
    .s1, .nbin_rd, .nbout_rd, .wpb_mu, .wpb_sg, .gb_rd,
    .row, .bcast, .load, .load_en, .fu_mu, .fu_sg, .fu_dw,
    .s2, .w_samp_q, .elem_q, .row_q, .fu_dmu, .fu_dsg, .fu_vld,
    .pe_w, .psum, .dmu, .dsg, .dvld,
    .s3, .pe_out, .nb_wdata, .gb_we, .gb_waddr, .gb_wdata
  );

  always_ff @(posedge clk) begin
    w_samp_q <= w_samp;
    elem_q   <= bcast;
    row_q    <= row;
  end

  // --------------------------------------- GRNG and function-unit slices
  for (genvar p = 0; p < NPE; p++) begin : g_slice
    grng_mode_e mode;
    data_t      eps;
    always_comb begin
      mode = GRNG_IDLE;
      if (uop.grng_fwd && (uop.grng_all || p == 0))     mode = GRNG_FWD;
      else if (s1.grng_bwd && (s1.grng_all || p == 0))  mode = GRNG_BWD;
    end
    grng #(.SEED(LFSR_N'(grng_seed(SPU_ID, p)))) u_grng (
      .clk, .rst_n, .mode, .eps, .pattern()
    );
    func_unit u_fu (
      .clk, .rst_n, .mu(fu_mu[p]), .sigma(fu_sg[p]), .eps, .dw(fu_dw[p]),
      .upd_en(s1.upd && (s1.wrd.all || p == 0)),
      .w(w_samp[p]), .dmu(fu_dmu[p]), .dsigma(fu_dsg[p]), .upd_valid(fu_vld[p])
    );
  end

  // ------------------------------------------------ shift array, PE tile
  data_t sa_left [TILE];
  data_t pe_bottom [TILE], sa_bottom [TILE];
  always_comb begin
    for (int c = 0; c < TILE; c++) begin
      pe_bottom[c] = row[c];
      sa_bottom[c] = row[TILE + c];
    end
  end

  shift_array u_sa (
    .clk, .rst_n, .shift(s1.shift), .bottom_in(sa_bottom), .bcast, .left_out(sa_left)
  );

  pe_tile u_tile (
    .clk, .rst_n, .shift(s1.shift), .op(s2.pe_op),
    .right_in(sa_left), .bottom_in(pe_bottom), .load, .load_en,
    .w(pe_w), .psum, .psum_row(s2.psum_row), .relu(s3.nbw.en && s3.nbw.relu),
    .out(pe_out), .acc(pe_acc)
  );

endmodule
