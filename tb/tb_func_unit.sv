// tb_func_unit: checks the sampler, prior-derivative unit and updater of one
// GRNG slice against a reference written with plain integer arithmetic.
//
// The sampled weight w = mu + eps * sigma is combinational and checked every
// cycle. When upd_en is high, the unit must present in the next cycle
// dmu = dw + 4 w and dsigma = dmu * eps (all Q8.8, saturating) with
// upd_valid high; otherwise upd_valid must be low.
module tb_func_unit;
  import sbnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t mu, sigma, eps, dw, w, dmu, dsigma;
  logic  upd_en, upd_valid;
  func_unit u_dut (.clk, .rst_n, .mu, .sigma, .eps, .dw, .upd_en, .w, .dmu, .dsigma, .upd_valid);

  function automatic longint clip(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction
  function automatic longint fl(longint p);      // floor(p / 256)
    return (p >= 0) ? p / 256 : -((-p + 255) / 256);
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    longint ew, edm, eds;
    logic   eupd;
    upd_en = 0; mu = 0; sigma = 0; eps = 0; dw = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      // mostly realistic ranges, sometimes extreme values to reach saturation
      if (i % 10 == 0) begin
        mu = data_t'($urandom); sigma = data_t'($urandom);
        eps = data_t'($urandom); dw = data_t'($urandom);
      end else begin
        mu    = data_t'($signed($urandom_range(0, 1024)) - 512);
        sigma = data_t'($urandom_range(0, 256));
        eps   = data_t'($signed($urandom_range(0, 1536)) - 768);
        dw    = data_t'($signed($urandom_range(0, 2048)) - 1024);
      end
      upd_en = $urandom_range(0, 1);
      #1;
      ew = clip(longint'(mu) + clip(fl(longint'(eps) * longint'(sigma))));
      check("w", w, ew);
      edm  = clip(longint'(dw) + clip(ew * 4));
      eds  = clip(fl(edm * longint'(eps)));
      eupd = upd_en;
      @(negedge clk);
      check("upd_valid", upd_valid, eupd);
      if (eupd) begin
        check("dmu", dmu, edm);
        check("dsigma", dsigma, eds);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
