// tb_grad_avg: checks the cross-SPU gradient averaging and parameter update.
//
// With random dmu / dsigma from all 16 SPUs and random current mu / sigma
// on every lane, each lane must give mu' = mu - floor(floor(sum dmu / 16) / 16)
// and the same for sigma (saturating to 16 bits), and its write enable must
// follow dvld. The unit is combinational; each vector is checked after a
// short settle delay. Large gradients are included to reach saturation.
module tb_grad_avg;
  import sbnn_pkg::*;

  localparam int NSPU = 16;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t dmu [NSPU][NPE], dsg [NSPU][NPE], mu [NPE], sigma [NPE], mu_new [NPE], sg_new [NPE];
  logic  dvld [NPE], we [NPE];
  grad_avg #(.NSPU(NSPU), .LR_SHIFT(4)) u_dut (.dmu, .dsg, .dvld, .mu, .sigma, .we, .mu_new, .sg_new);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic longint fdiv(longint a, longint d);   // floor division
    return (a >= 0) ? a / d : -((-a + d - 1) / d);
  endfunction
  function automatic longint clip(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  initial begin
    for (int it = 0; it < 1000; it++) begin
      for (int l = 0; l < NPE; l++) begin
        mu[l]    = data_t'($urandom);
        sigma[l] = data_t'($urandom);
        dvld[l]  = $urandom_range(0, 1);
        for (int s = 0; s < NSPU; s++) begin
          dmu[s][l] = (it % 4 == 0) ? data_t'($urandom) : data_t'($signed($urandom_range(0, 4096)) - 2048);
          dsg[s][l] = (it % 4 == 0) ? data_t'($urandom) : data_t'($signed($urandom_range(0, 4096)) - 2048);
        end
      end
      #1;
      for (int l = 0; l < NPE; l++) begin
        longint sm, ss;
        sm = 0; ss = 0;
        for (int s = 0; s < NSPU; s++) begin sm += dmu[s][l]; ss += dsg[s][l]; end
        check("we", we[l], dvld[l]);
        check("mu_new", mu_new[l], clip(longint'(mu[l]) - fdiv(fdiv(sm, 16), 16)));
        check("sg_new", sg_new[l], clip(longint'(sigma[l]) - fdiv(fdiv(ss, 16), 16)));
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
