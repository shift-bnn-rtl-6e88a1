// shift_bnn_top: the Shift-BNN training accelerator.
//
// NSPU Sample Processing Units (SPUs) each train one sampled model of the
// Bayesian network. They share the weight parameter buffer (mu, sigma) and
// the central controller, which broadcasts one micro-operation per cycle to
// all SPUs. Every SPU generates its own Gaussian random numbers with its own
// GRNG seeds, so the SPUs work on different weight samples of the same
// parameters. During the backward stage each SPU regenerates its random
// numbers by shifting its LFSRs backwards, forms dmu and dsigma for each
// weight, and grad_avg averages them over the SPUs and writes the updated
// mu and sigma back into the WPB in the same pass.
//
// Off-chip memory is not part of this block: the host_nb_* port writes and
// reads the neuron buffers of one SPU at a time, host_wpb_* loads the WPB and
// reads the entry at host_wpb_addr whenever the controller is not reading
// it. Both are meant to be used while the controller is idle
// (instr_ready high). Read data appear two cycles after the read request.
//
// Instructions (instr_t, see sbnn_pkg) are accepted on instr_valid &&
// instr_ready; 'done' pulses when an instruction has finished.
//
// Follows the paper: 16 SPUs, each with its PE tile, shift units, GRNG and
// function units, NBin/NBout and crossbar; a shared WPB; a controller;
// gradients averaged across SPUs. This design's choices: the host ports in
// place of the DRAM interface, the instruction format and the update rule.
// Only the entry address of the delayed WPB read request is used for the
// write-back, so lint lists its other fields as unused.
module shift_bnn_top
  import sbnn_pkg::*;
#(
  parameter int unsigned NSPU      = 16,
  parameter int unsigned NB_DEPTH  = 6144,
  parameter int unsigned WPB_DEPTH = 4096,
  parameter int unsigned GB_DEPTH  = 4096,
  parameter int unsigned LR_SHIFT  = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  // instructions
  input  instr_t          instr,
  input  logic            instr_valid,
  output logic            instr_ready,
  output logic            done,
  // neuron-buffer access (external memory side)
  input  logic            host_nb_we,
  input  logic            host_nb_re,
  input  logic [$clog2(NSPU)-1:0] host_nb_spu,
  input  logic            host_nb_sel,
  input  logic [2:0]      host_nb_bank,
  input  logic [NBAW-1:0] host_nb_addr,
  input  data_t           host_nb_wdata,
  output data_t           host_nb_rdata,
  // WPB access
  input  logic            host_wpb_we,
  input  logic            host_wpb_sel,
  input  logic [3:0]      host_wpb_lane,
  input  logic [WAW-1:0]  host_wpb_addr,
  input  data_t           host_wpb_wdata,
  output data_t           host_wpb_rdata
);

  uop_t uop;

  controller u_ctrl (
    .clk, .rst_n, .instr, .instr_valid, .instr_ready, .done, .uop
  );

  // ------------------------------------------------------------------ WPB
  data_t          mu [NPE], sigma [NPE];
  data_t          mu_q [NPE], sigma_q [NPE];
  logic           upd_we [NPE];
  data_t          upd_mu [NPE], upd_sg [NPE];
  wb_rd_t         wrd_s1, wrd_s2;
  logic           hsel_q, hsel_qq;
  logic [3:0]     hlane_q, hlane_qq;

  wpb #(.DEPTH(WPB_DEPTH)) u_wpb (
    .clk,
    .rd_addr(uop.wrd.en ? uop.wrd.addr : host_wpb_addr),
    .mu, .sigma,
    .upd_we, .upd_addr(wrd_s2.addr), .upd_mu, .upd_sigma(upd_sg),
    .host_we(host_wpb_we), .host_sel(host_wpb_sel), .host_lane(host_wpb_lane),
    .host_addr(host_wpb_addr), .host_wdata(host_wpb_wdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wrd_s1 <= '0;
      wrd_s2 <= '0;
    end else begin
      wrd_s1 <= uop.wrd;
      wrd_s2 <= wrd_s1;
    end
  end

  always_ff @(posedge clk) begin
    mu_q     <= mu;
    sigma_q  <= sigma;
    hsel_q   <= host_wpb_sel;
    hsel_qq  <= hsel_q;
    hlane_q  <= host_wpb_lane;
    hlane_qq <= hlane_q;
  end
  assign host_wpb_rdata = hsel_qq ? sigma_q[hlane_qq] : mu_q[hlane_qq];

  // ----------------------------------------------------------------- SPUs
  data_t dmu [NSPU][NPE], dsg [NSPU][NPE];
  logic  dvld [NSPU][NPE];
  data_t spu_rdata [NSPU];

  for (genvar s = 0; s < NSPU; s++) begin : g_spu
    spu #(.SPU_ID(s), .NB_DEPTH(NB_DEPTH), .GB_DEPTH(GB_DEPTH)) u_spu (
      .clk, .rst_n, .uop,
      .wpb_mu(mu), .wpb_sg(sigma),
      .dmu(dmu[s]), .dsg(dsg[s]), .dvld(dvld[s]),
      .host_we(host_nb_we && host_nb_spu == s),
      .host_re(host_nb_re && host_nb_spu == s),
      .host_sel(host_nb_sel), .host_bank(host_nb_bank), .host_addr(host_nb_addr),
      .host_wdata(host_nb_wdata), .host_rdata(spu_rdata[s])
    );
  end

  logic [$clog2(NSPU)-1:0] spu_q, spu_qq;
  always_ff @(posedge clk) begin
    spu_q  <= host_nb_spu;
    spu_qq <= spu_q;
  end
  assign host_nb_rdata = spu_rdata[spu_qq];

  // ------------------------------------------- gradient averaging, update
  grad_avg #(.NSPU(NSPU), .LR_SHIFT(LR_SHIFT)) u_avg (
    .dmu, .dsg, .dvld(dvld[0]), .mu(mu_q), .sigma(sigma_q),
    .we(upd_we), .mu_new(upd_mu), .sg_new(upd_sg)
  );

endmodule
