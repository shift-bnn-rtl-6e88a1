// func_unit: the function units of one GRNG slice (sampler, derivative
// processing unit and weight-parameter updater).
//
//   sampler  w      = mu + eps * sigma                       (combinational)
//   DPU      dw'    = dw + (w <<< 2)                         (combinational)
//   updater  dmu    = dw'
//            dsigma = dw' * eps                              (registered)
//
// The sampler turns a Gaussian variable into a weight sample in both the
// forward and the backward stage. In the backward stage the DPU adds the
// derivative of the prior and posterior terms, approximated as w / sigma_c^2
// with sigma_c = 0.5, i.e. w shifted left by two bits, to the likelihood
// gradient dw produced earlier by the gradient-calculation stage. The updater
// then forms the gradients of mu and sigma from w = mu + eps * sigma.
//
// Interface: all values are Q8.8 (data_t). 'w' follows the inputs in the
// same cycle. 'dmu'/'dsigma' are registered: when 'upd_en' is high they take
// the gradients of the current inputs at the next clock edge and 'upd_valid'
// is high for one cycle.
//
// Follows the paper: one multiplier and one adder in the sampler, the
// shift-by-two DPU, dw' times eps in the updater and the output register on
// the mu path of Fig. 9. This design's choice: saturating Q8.8 arithmetic,
// and registering dsigma alongside dmu so both leave in the same cycle.
module func_unit
  import sbnn_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  data_t  mu,
  input  data_t  sigma,
  input  data_t  eps,
  input  data_t  dw,         // likelihood gradient of this weight (from GC)
  input  logic   upd_en,
  output data_t  w,          // sampled weight
  output data_t  dmu,
  output data_t  dsigma,
  output logic   upd_valid
);

  data_t w_prior;   // derivative of prior + posterior, w * 4
  data_t dw_tot;    // dw'

  assign w       = qadd(mu, qmul(eps, sigma));
  assign w_prior = sat16({{(ACCW+2-DW){w[DW-1]}}, w} <<< 2);
  assign dw_tot  = qadd(dw, w_prior);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dmu       <= '0;
      dsigma    <= '0;
      upd_valid <= 1'b0;
    end else begin
      upd_valid <= upd_en;
      if (upd_en) begin
        dmu    <= dw_tot;
        dsigma <= qmul(dw_tot, eps);
      end
    end
  end

endmodule
