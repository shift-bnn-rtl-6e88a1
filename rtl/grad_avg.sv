// grad_avg: averages the mu/sigma gradients of all SPUs and updates the
// weight parameters.
//
// Every SPU produces, for the same weight in the same cycle, its own
// gradients dmu and dsigma (one per sampled model). For each of the 16
// lanes this block adds the NSPU values, divides by NSPU (an arithmetic
// shift, NSPU being a power of two) and applies a plain gradient-descent
// step with a learning rate of 2^-LR_SHIFT:
//   mu'    = mu    - (mean(dmu)    >>> LR_SHIFT)
//   sigma' = sigma - (mean(dsigma) >>> LR_SHIFT)
// The result and a per-lane write enable go straight to the WPB update port
// (combinational, same cycle as the gradients).
//
// Follows the paper: "(dmu, dsigma) will be further averaged across
// different SPUs and then used to update the weight parameters". This
// design's choice: the adder-tree form, saturation, and the learning rate,
// which the paper does not give.
module grad_avg
  import sbnn_pkg::*;
#(
  parameter int unsigned NSPU     = 16,
  parameter int unsigned LR_SHIFT = 4
) (
  input  data_t  dmu    [NSPU][NPE],
  input  data_t  dsg    [NSPU][NPE],
  input  logic   dvld   [NPE],
  input  data_t  mu     [NPE],
  input  data_t  sigma  [NPE],
  output logic   we     [NPE],
  output data_t  mu_new [NPE],
  output data_t  sg_new [NPE]
);

  localparam int unsigned SH = $clog2(NSPU);
  localparam int unsigned SW = DW + SH + 1;

  always_comb begin
    for (int l = 0; l < NPE; l++) begin
      logic signed [SW-1:0] smu, ssg;
      data_t                amu, asg;
      smu = '0;
      ssg = '0;
      for (int s = 0; s < NSPU; s++) begin
        smu += SW'(dmu[s][l]);
        ssg += SW'(dsg[s][l]);
      end
      amu = DW'(smu >>> SH);
      asg = DW'(ssg >>> SH);
      we[l]     = dvld[l];
      mu_new[l] = qadd(mu[l],    -(amu >>> LR_SHIFT));
      sg_new[l] = qadd(sigma[l], -(asg >>> LR_SHIFT));
    end
  end

endmodule
