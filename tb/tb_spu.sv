// tb_spu: checks one Sample Processing Unit on its own.
//
// The controller supplies the micro-operations and a small array in the
// testbench plays the shared weight parameter buffer (one-cycle read, as
// the real one). The SPU (SPU_ID 3) runs a padded convolution (2 -> 3
// channels, 3x3 kernel, 6x6 map, zero padding 1, so the output is 6x6 and
// needs four tiles and three rewinds), then an FC layer (12 -> 5), then a
// backward FC pass with gradients, where the dmu / dsigma lanes the SPU
// presents must equal dw + 4 w and (dw + 4 w) * eps for the regenerated
// weight. The reference keeps its own copy of the slice LFSRs, so a wrong
// forward or backward shift shows as a mismatch.
module tb_spu;
  import sbnn_pkg::*;

  localparam int SID = 3;
  localparam int CI = 2, CO = 3, K = 3, H = 6;
  localparam int FI = 12, FO = 5;
  localparam int FCW = 64;          // linear weight index of the FC layer

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  instr_t instr;
  logic   instr_valid, instr_ready, done;
  uop_t   uop;
  controller u_ctrl (.clk, .rst_n, .instr, .instr_valid, .instr_ready, .done, .uop);

  // behavioural WPB
  data_t wmu [4096], wsg [4096];
  data_t wpb_mu [NPE], wpb_sg [NPE];
  always_ff @(posedge clk)
    for (int l = 0; l < NPE; l++) begin
      wpb_mu[l] <= wmu[int'(uop.wrd.addr) * 16 + l];
      wpb_sg[l] <= wsg[int'(uop.wrd.addr) * 16 + l];
    end

  data_t dmu [NPE], dsg [NPE], host_wdata, host_rdata;
  logic  dvld [NPE], host_we, host_re, host_sel;
  logic [2:0] host_bank;
  logic [NBAW-1:0] host_addr;
  spu #(.SPU_ID(SID), .NB_DEPTH(1024), .GB_DEPTH(256)) u_dut (
    .clk, .rst_n, .uop, .wpb_mu, .wpb_sg, .dmu, .dsg, .dvld,
    .host_we, .host_re, .host_sel, .host_bank, .host_addr, .host_wdata, .host_rdata
  );

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ------------------------------------------------------------ reference
  logic [255:0] lf [16];
  function automatic void step(int p);
    lf[p] = {lf[p][254:0], lf[p][255] ^ lf[p][253] ^ lf[p][250] ^ lf[p][245]};
  endfunction
  function automatic data_t epsr(int p);
    return data_t'(($countones(lf[p]) - 128) * 32);
  endfunction
  function automatic data_t sat(longint v);
    return (v > 32767) ? 16'sd32767 : (v < -32768) ? -16'sd32768 : data_t'(v);
  endfunction
  function automatic data_t a2d(longint acc);
    return sat(longint'(int'(acc)) >>> 8);
  endfunction
  function automatic data_t mulq(data_t a, data_t b);
    return sat((longint'(a) * longint'(b)) >>> 8);
  endfunction
  function automatic data_t addq(data_t a, data_t b);
    return sat(longint'(a) + longint'(b));
  endfunction

  task automatic nb_write(bit sel, int base, int y, int x, data_t v);
    @(negedge clk);
    host_we = 1; host_sel = sel; host_bank = 3'(x % 8); host_addr = NBAW'(base + y + x / 8);
    host_wdata = v;
    @(negedge clk);
    host_we = 0;
  endtask
  task automatic nb_read(bit sel, int base, int y, int x, output data_t v);
    @(negedge clk);
    host_re = 1; host_sel = sel; host_bank = 3'(x % 8); host_addr = NBAW'(base + y + x / 8);
    @(negedge clk);
    host_re = 0;
    @(negedge clk);
    v = host_rdata;
  endtask
  task automatic run(instr_t in);
    @(negedge clk);
    instr = in; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    while (!done) @(negedge clk);
  endtask

  // gradient lanes monitor (FC backward)
  data_t gmu [$], gsg [$];
  int    glane [$];
  always @(posedge clk)
    for (int l = 0; l < NPE; l++) if (dvld[l]) begin gmu.push_back(dmu[l]); gsg.push_back(dsg[l]); glane.push_back(l); end

  initial begin
    data_t D [CI][H][H], W [CO*CI*K*K], X [FI], FE [FO], FWt [FO][FI], eF [FO][FI], v;
    instr_t in;
    instr = '0; instr_valid = 0; host_we = 0; host_re = 0; host_sel = 0; host_bank = 0;
    host_addr = 0; host_wdata = 0;
    for (int j = 0; j < 4096; j++) begin
      wmu[j] = data_t'($signed($urandom_range(0, 256)) - 128);
      wsg[j] = data_t'($urandom_range(8, 48));
    end
    for (int p = 0; p < 16; p++) lf[p] = grng_seed(SID, p);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------------------------------------------------- conv
    for (int c = 0; c < CI; c++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      D[c][y][x] = data_t'($signed($urandom_range(0, 512)) - 256);
      nb_write(0, c * H, y, x, D[c][y][x]);
    end
    in = '0;
    in.op = OP_CONV_FW; in.k = 3; in.pad = 1; in.ci = CI; in.co = CO;
    in.src_h = H; in.src_w = H; in.src_sel = 0; in.src_base = 0;
    in.dst_sel = 1; in.dst_base = 0; in.w_base = 0; in.relu = 0;
    run(in);
    for (int j = 0; j < CO*CI*K*K; j++) begin
      step(0);
      W[j] = addq(wmu[j], mulq(epsr(0), wsg[j]));
    end
    for (int co = 0; co < CO; co++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      longint acc;
      acc = 0;
      for (int ci = 0; ci < CI; ci++) for (int ki = 0; ki < K; ki++) for (int kj = 0; kj < K; kj++) begin
        int sy, sx;
        sy = y + ki - 1; sx = x + kj - 1;
        if (sy >= 0 && sy < H && sx >= 0 && sx < H)
          acc += longint'(W[((co*CI+ci)*K+ki)*K+kj]) * longint'(D[ci][sy][sx]);
      end
      nb_read(1, co * H, y, x, v);
      check($sformatf("conv c%0d (%0d,%0d)", co, y, x), v, a2d(acc));
    end

    // ------------------------------------------------------------ FC
    for (int i = 0; i < FI; i++) begin
      X[i] = data_t'($signed($urandom_range(0, 512)) - 256);
      nb_write(0, 100, 0, i, X[i]);
    end
    for (int o = 0; o < FO; o++) begin
      FE[o] = data_t'($signed($urandom_range(0, 256)) - 128);
      nb_write(1, 200, 0, o, FE[o]);
    end
    in = '0;
    in.op = OP_FC_FW; in.ci = FI; in.co = FO; in.src_h = 1; in.src_w = FI;
    in.src_sel = 0; in.src_base = 100; in.dst_sel = 1; in.dst_base = 300; in.w_base = FCW;
    run(in);
    for (int i = 0; i < FI; i++) for (int p = 0; p < 16; p++) begin
      step(p);
      if (p < FO) begin
        eF[p][i] = epsr(p);
        FWt[p][i] = addq(wmu[FCW + i * 16 + p], mulq(eF[p][i], wsg[FCW + i * 16 + p]));
      end
    end
    for (int o = 0; o < FO; o++) begin
      longint acc;
      acc = 0;
      for (int i = 0; i < FI; i++) acc += longint'(FWt[o][i]) * longint'(X[i]);
      nb_read(1, 300, 0, o, v);
      check($sformatf("fc o%0d", o), v, a2d(acc));
    end

    // FC gradients, then backward regeneration with the updater
    in.op = OP_FC_GC; in.aux_sel = 1; in.aux_base = 200; in.aux_h = 1; in.aux_w = FO; in.g_base = FCW;
    run(in);
    gmu.delete(); gsg.delete(); glane.delete();
    in.op = OP_FC_BW; in.update = 1;
    run(in);
    repeat (4) @(negedge clk);
    check("gradient lanes", glane.size(), FI * 16);
    // backward order: input FI-1 first
    for (int k = 0; k < glane.size() && k < FI * 16; k++) begin
      int i, p;
      data_t g, dm;
      i = FI - 1 - k / 16;
      p = glane[k];
      if (p < FO) begin
        g  = a2d(longint'(FE[p]) * longint'(X[i]));
        dm = addq(g, sat(longint'(FWt[p][i]) * 4));
        check($sformatf("dmu i%0d p%0d", i, p), gmu[k], dm);
        check($sformatf("dsigma i%0d p%0d", i, p), gsg[k], mulq(dm, eF[p][i]));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
