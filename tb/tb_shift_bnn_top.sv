// tb_shift_bnn_top: end-to-end test of the accelerator at its default size
// (16 SPUs, full buffer depths).
//
// A small two-layer Bayesian network is trained for one step on every SPU:
//   conv  2 -> 2 channels, 3x3 kernel, 7x7 input (5x5 output, four tiles)
//   pool  2x2 max, stride 2, on the conv output
//   fc    8 -> 20 neurons (two 16-neuron groups, the second partial)
// The sequence is CONV_FW, POOL, FC_FW, FC_GC, FC_BW (with update), CONV_GC,
// CONV_BW (with update, zero padding 2, four tiles). After each step the
// results are read back through the host ports of SPUs 0, 7 and 15 and
// compared with a reference computed here: the reference runs its own
// forward-only model of each LFSR, records the Gaussian numbers used in the
// forward pass and reuses them for the backward pass, so any error in the
// hardware's backward shifting shows up as wrong errors or wrong updates.
// It also counts how often each mechanism occurred (GRNG forward/backward
// steps, tile rewinds, psum read-back, zero padding, left/up shifts,
// broadcast, vector load, max pooling, ReLU clipping, parameter updates) and
// fails if one never happened.
module tb_shift_bnn_top;
  import sbnn_pkg::*;

  localparam int NSPU = 16;
  localparam int CI = 2, CO = 2, K = 3, H = 7, HO = H - K + 1;   // conv
  localparam int FI = 8, FO = 20, FT = (FO + 15) / 16;          // fc
  localparam int FC_WBASE = 64;      // linear weight index (entry 4)
  localparam int FC_GBASE = FC_WBASE; // gradients mirror the WPB layout

  // buffer layout (bank-word bases)
  localparam int NBIN_D   = 0;       // conv input, 2 x 7x7
  localparam int NBIN_X   = 200;     // fc input vector
  localparam int NBIN_EIN = 400;     // conv errors propagated to the input
  localparam int NBO_E    = 0;       // conv output errors, 2 x 5x5
  localparam int NBO_FE   = 100;     // fc output errors
  localparam int NBO_Y    = 300;     // conv output
  localparam int NBO_P    = 500;     // pool output
  localparam int NBO_FY   = 600;     // fc output

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  instr_t instr;
  logic instr_valid, instr_ready, done;
  logic host_nb_we = 0, host_nb_re = 0, host_nb_sel = 0;
  logic [3:0] host_nb_spu = 0;
  logic [2:0] host_nb_bank = 0;
  logic [NBAW-1:0] host_nb_addr = 0;
  data_t host_nb_wdata = 0, host_nb_rdata;
  logic host_wpb_we = 0, host_wpb_sel = 0;
  logic [3:0] host_wpb_lane = 0;
  logic [WAW-1:0] host_wpb_addr = 0;
  data_t host_wpb_wdata = 0, host_wpb_rdata;

  shift_bnn_top u_dut (
    .clk, .rst_n, .instr, .instr_valid, .instr_ready, .done,
    .host_nb_we, .host_nb_re, .host_nb_spu, .host_nb_sel, .host_nb_bank, .host_nb_addr,
    .host_nb_wdata, .host_nb_rdata,
    .host_wpb_we, .host_wpb_sel, .host_wpb_lane, .host_wpb_addr, .host_wpb_wdata,
    .host_wpb_rdata
  );

  int checks = 0, failures = 0;

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------- mechanism counters
  int n_fwd, n_bwd, n_rewind, n_psum, n_pad, n_left, n_up, n_bcast, n_loadv, n_max,
      n_relu, n_upd;
  always @(posedge clk) if (rst_n) begin
    uop_t u;
    u = u_dut.uop;
    if (u.grng_fwd) n_fwd++;
    if (u.grng_bwd) n_bwd++;
    if (u_dut.u_ctrl.ph == 4'd5) n_rewind++;   // P_REWIND
    if (u.pe_op == PE_PSUM) n_psum++;
    if (u.rda.en && (u.rda.y < 0 || u.rda.x0 < 0)) n_pad++;
    if (u.shift == SH_LEFT) n_left++;
    if (u.shift == SH_UP) n_up++;
    if (u.shift == SH_BCAST) n_bcast++;
    if (u.shift == SH_LOADV_LO || u.shift == SH_LOADV_HI) n_loadv++;
    if (u.pe_op == PE_MAX) n_max++;
    if (u_dut.upd_we[0] || u_dut.upd_we[5]) n_upd++;
  end

  // --------------------------------------------------- reference model
  data_t mu [4096], sg [4096];                 // linear weight index
  data_t D  [NSPU][CI][H][H];
  data_t E  [NSPU][CO][HO][HO];
  data_t X  [NSPU][FI];
  data_t FE [NSPU][32];
  data_t eps_c [NSPU][CO*CI*K*K];              // eps of conv weight j
  data_t eps_f [NSPU][FT][FI][16];             // eps of fc weight (t, i, lane)
  logic [255:0] lf [NSPU][16];                 // reference LFSR state

  function automatic void ref_step(int s, int p);
    logic nb;
    nb = lf[s][p][255] ^ lf[s][p][253] ^ lf[s][p][250] ^ lf[s][p][245];  // R256, R254, R251, R246
    lf[s][p] = {lf[s][p][254:0], nb};
  endfunction

  function automatic data_t ref_eps(int s, int p);
    int ones;
    ones = $countones(lf[s][p]);
    return data_t'((ones - 128) * 32);
  endfunction

  function automatic data_t sat(longint v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return data_t'(v);
  endfunction
  function automatic data_t a2d(longint acc);   // Q16.16 -> Q8.8 (acc kept to 32 bits)
    int a32;
    a32 = int'(acc);
    return sat(longint'(a32 >>> 8));
  endfunction
  function automatic data_t mulq(data_t a, data_t b);
    return sat((longint'(a) * longint'(b)) >>> 8);
  endfunction
  function automatic data_t addq(data_t a, data_t b);
    return sat(longint'(a) + longint'(b));
  endfunction
  function automatic data_t samp(data_t m, data_t s, data_t e);
    return addq(m, mulq(e, s));
  endfunction

  // ------------------------------------------------------- host access
  task automatic nb_write(int s, bit sel, int base, int pitch, int y, int x, data_t v);
    @(negedge clk);
    host_nb_we = 1; host_nb_spu = 4'(s); host_nb_sel = sel;
    host_nb_bank = 3'(x % 8); host_nb_addr = NBAW'(base + y * pitch + x / 8);
    host_nb_wdata = v;
    @(negedge clk);
    host_nb_we = 0;
  endtask

  task automatic nb_read(int s, bit sel, int base, int pitch, int y, int x, output data_t v);
    @(negedge clk);
    host_nb_re = 1; host_nb_spu = 4'(s); host_nb_sel = sel;
    host_nb_bank = 3'(x % 8); host_nb_addr = NBAW'(base + y * pitch + x / 8);
    @(negedge clk);
    host_nb_re = 0;
    @(negedge clk);
    v = host_nb_rdata;
  endtask

  task automatic wpb_write(bit sel, int j, data_t v);
    @(negedge clk);
    host_wpb_we = 1; host_wpb_sel = sel; host_wpb_lane = 4'(j % 16);
    host_wpb_addr = WAW'(j / 16); host_wpb_wdata = v;
    @(negedge clk);
    host_wpb_we = 0;
  endtask

  task automatic wpb_read(bit sel, int j, output data_t v);
    @(negedge clk);
    host_wpb_sel = sel; host_wpb_lane = 4'(j % 16); host_wpb_addr = WAW'(j / 16);
    @(negedge clk);
    @(negedge clk);
    v = host_wpb_rdata;
  endtask

  task automatic run(instr_t in);
    int cyc;
    @(negedge clk);
    instr = in;
    instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    cyc = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    $display("  op %0d finished in %0d cycles", in.op, cyc);
  endtask

  task automatic check(string what, data_t got, data_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int chk_spus [3] = '{0, 7, 15};

  // ---------------------------------------------------------- the test
  initial begin
    data_t v;
    instr_t in;
    data_t W [NSPU][CO*CI*K*K];
    data_t Y [NSPU][CO][HO][HO];
    data_t FW_ [NSPU][32][FI];
    data_t G [NSPU][CO*CI*K*K];
    data_t mu_new, sg_new;
    instr = '0;
    instr_valid = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;

    for (int s = 0; s < NSPU; s++)
      for (int p = 0; p < 16; p++) lf[s][p] = grng_seed(s, p);

    // ------------------------------------------------------------ load
    for (int j = 0; j < 4096; j++) begin mu[j] = 0; sg[j] = 0; end
    for (int j = 0; j < CO*CI*K*K; j++) begin
      mu[j] = data_t'($signed($urandom_range(0, 256)) - 128);
      sg[j] = data_t'($urandom_range(8, 48));
      wpb_write(0, j, mu[j]);
      wpb_write(1, j, sg[j]);
    end
    for (int j = FC_WBASE; j < FC_WBASE + FT * FI * 16; j++) begin
      mu[j] = data_t'($signed($urandom_range(0, 256)) - 128);
      sg[j] = data_t'($urandom_range(8, 48));
      wpb_write(0, j, mu[j]);
      wpb_write(1, j, sg[j]);
    end
    for (int s = 0; s < NSPU; s++) begin
      for (int c = 0; c < CI; c++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
        D[s][c][y][x] = data_t'($signed($urandom_range(0, 512)) - 256);
        nb_write(s, 0, NBIN_D + c * H * 1, 1, y, x, D[s][c][y][x]);
      end
      for (int c = 0; c < CO; c++) for (int y = 0; y < HO; y++) for (int x = 0; x < HO; x++) begin
        E[s][c][y][x] = data_t'($signed($urandom_range(0, 256)) - 128);
        nb_write(s, 1, NBO_E + c * HO * 1, 1, y, x, E[s][c][y][x]);
      end
      for (int i = 0; i < FI; i++) begin
        X[s][i] = data_t'($signed($urandom_range(0, 512)) - 256);
        nb_write(s, 0, NBIN_X, 1, 0, i, X[s][i]);
      end
      for (int o = 0; o < 32; o++) begin
        FE[s][o] = (o < FO) ? data_t'($signed($urandom_range(0, 256)) - 128) : '0;
        if (o < FO) nb_write(s, 1, NBO_FE, 3, 0, o, FE[s][o]);
      end
    end

    // ------------------------------------------------------ CONV_FW
    $display("CONV_FW");
    in = '0;
    in.op = OP_CONV_FW; in.k = 3'(K); in.ci = CHW'(CI); in.co = CHW'(CO);
    in.src_h = DIMW'(H); in.src_w = DIMW'(H); in.src_sel = 0; in.src_base = NBAW'(NBIN_D);
    in.dst_sel = 1; in.dst_base = NBAW'(NBO_Y); in.w_base = 0; in.relu = 1;
    run(in);
    for (int s = 0; s < NSPU; s++) begin
      for (int j = 0; j < CO*CI*K*K; j++) begin
        ref_step(s, 0);
        eps_c[s][j] = ref_eps(s, 0);
        W[s][j] = samp(mu[j], sg[j], eps_c[s][j]);
      end
      for (int co = 0; co < CO; co++) for (int y = 0; y < HO; y++) for (int x = 0; x < HO; x++) begin
        longint acc;
        acc = 0;
        for (int ci = 0; ci < CI; ci++) for (int ki = 0; ki < K; ki++) for (int kj = 0; kj < K; kj++)
          acc += longint'(W[s][((co*CI+ci)*K+ki)*K+kj]) * longint'(D[s][ci][y+ki][x+kj]);
        Y[s][co][y][x] = a2d(acc);
        if (Y[s][co][y][x] < 0) begin Y[s][co][y][x] = 0; n_relu++; end
      end
    end
    foreach (chk_spus[q]) begin
      int s;
      s = chk_spus[q];
      for (int co = 0; co < CO; co++) for (int y = 0; y < HO; y++) for (int x = 0; x < HO; x++) begin
        nb_read(s, 1, NBO_Y + co * HO, 1, y, x, v);
        check($sformatf("conv fw s%0d c%0d (%0d,%0d)", s, co, y, x), v, Y[s][co][y][x]);
      end
    end

    // --------------------------------------------------------- POOL
    $display("POOL");
    in = '0;
    in.op = OP_POOL; in.k = 2; in.ci = CHW'(CO); in.co = CHW'(CO);
    in.src_h = DIMW'(HO); in.src_w = DIMW'(HO); in.src_sel = 1; in.src_base = NBAW'(NBO_Y);
    in.dst_sel = 1; in.dst_base = NBAW'(NBO_P);
    run(in);
    foreach (chk_spus[q]) begin
      int s;
      s = chk_spus[q];
      for (int c = 0; c < CO; c++) for (int y = 0; y < 2; y++) for (int x = 0; x < 2; x++) begin
        data_t m;
        m = Y[s][c][2*y][2*x];
        for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++)
          if (Y[s][c][2*y+dy][2*x+dx] > m) m = Y[s][c][2*y+dy][2*x+dx];
        nb_read(s, 1, NBO_P + c * 2, 1, y, x, v);
        check($sformatf("pool s%0d c%0d (%0d,%0d)", s, c, y, x), v, m);
      end
    end

    // -------------------------------------------------------- FC_FW
    $display("FC_FW");
    in = '0;
    in.op = OP_FC_FW; in.ci = CHW'(FI); in.co = CHW'(FO);
    in.src_h = 1; in.src_w = DIMW'(FI); in.src_sel = 0; in.src_base = NBAW'(NBIN_X);
    in.dst_sel = 1; in.dst_base = NBAW'(NBO_FY); in.w_base = FC_WBASE;
    run(in);
    for (int s = 0; s < NSPU; s++)
      for (int t = 0; t < FT; t++) for (int i = 0; i < FI; i++)
        for (int p = 0; p < 16; p++) begin
          int j;
          ref_step(s, p);
          eps_f[s][t][i][p] = ref_eps(s, p);
          j = FC_WBASE + (t * FI + i) * 16 + p;
          FW_[s][t*16+p][i] = samp(mu[j], sg[j], eps_f[s][t][i][p]);
        end
    foreach (chk_spus[q]) begin
      int s;
      s = chk_spus[q];
      for (int o = 0; o < FO; o++) begin
        longint acc;
        acc = 0;
        for (int i = 0; i < FI; i++) acc += longint'(FW_[s][o][i]) * longint'(X[s][i]);
        nb_read(s, 1, NBO_FY, 3, 0, o, v);
        check($sformatf("fc fw s%0d o%0d", s, o), v, a2d(acc));
      end
    end

    // ------------------------------------------------ FC_GC, FC_BW
    $display("FC_GC / FC_BW");
    in = '0;
    in.op = OP_FC_GC; in.ci = CHW'(FI); in.co = CHW'(FO);
    in.src_h = 1; in.src_w = DIMW'(FI); in.src_sel = 0; in.src_base = NBAW'(NBIN_X);
    in.aux_sel = 1; in.aux_base = NBAW'(NBO_FE); in.aux_h = 1; in.aux_w = DIMW'(FO);
    in.g_base = FC_GBASE;
    run(in);
    in.op = OP_FC_BW; in.w_base = FC_WBASE; in.update = 1;
    run(in);
    for (int t = 0; t < FT; t++) for (int i = 0; i < FI; i++) for (int p = 0; p < 16; p++) begin
      int j;
      longint smu, ssg;
      data_t amu, asg;
      j = FC_WBASE + (t * FI + i) * 16 + p;
      smu = 0; ssg = 0;
      for (int s = 0; s < NSPU; s++) begin
        data_t g, dm;
        g  = a2d(longint'(FE[s][t*16+p]) * longint'(X[s][i]));
        dm = addq(g, sat(longint'(FW_[s][t*16+p][i]) * 4));
        smu += dm;
        ssg += mulq(dm, eps_f[s][t][i][p]);
      end
      amu = data_t'(smu >>> 4);
      asg = data_t'(ssg >>> 4);
      mu_new = addq(mu[j], -(amu >>> 4));
      sg_new = addq(sg[j], -(asg >>> 4));
      if ((i + p) % 3 == 0) begin
        wpb_read(0, j, v);
        check($sformatf("fc mu %0d", j), v, mu_new);
        wpb_read(1, j, v);
        check($sformatf("fc sigma %0d", j), v, sg_new);
      end
    end

    // ----------------------------------------------- CONV_GC, CONV_BW
    $display("CONV_GC / CONV_BW");
    in = '0;
    in.op = OP_CONV_GC; in.k = 3'(K); in.ci = CHW'(CI); in.co = CHW'(CO);
    in.src_h = DIMW'(H); in.src_w = DIMW'(H); in.src_sel = 0; in.src_base = NBAW'(NBIN_D);
    in.aux_sel = 1; in.aux_base = NBAW'(NBO_E); in.aux_h = DIMW'(HO); in.aux_w = DIMW'(HO);
    in.g_base = 0;
    run(in);
    in = '0;
    in.op = OP_CONV_BW; in.k = 3'(K); in.pad = 3'(K - 1); in.ci = CHW'(CO); in.co = CHW'(CI);
    in.src_h = DIMW'(HO); in.src_w = DIMW'(HO); in.src_sel = 1; in.src_base = NBAW'(NBO_E);
    in.dst_sel = 0; in.dst_base = NBAW'(NBIN_EIN); in.w_base = 0; in.update = 1;
    run(in);
    for (int s = 0; s < NSPU; s++)
      for (int m = 0; m < CO; m++) for (int n = 0; n < CI; n++)
        for (int ki = 0; ki < K; ki++) for (int kj = 0; kj < K; kj++) begin
          longint acc;
          acc = 0;
          for (int y = 0; y < HO; y++) for (int x = 0; x < HO; x++)
            acc += longint'(E[s][m][y][x]) * longint'(D[s][n][y+ki][x+kj]);
          G[s][((m*CI+n)*K+ki)*K+kj] = a2d(acc);
        end
    foreach (chk_spus[q]) begin
      int s;
      s = chk_spus[q];
      for (int n = 0; n < CI; n++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
        data_t e;
        e = 0;
        for (int m = CO - 1; m >= 0; m--) begin
          longint acc;
          acc = (m == CO - 1) ? 0 : longint'(e) * 256;
          for (int ki = 0; ki < K; ki++) for (int kj = 0; kj < K; kj++) begin
            int sy, sx;
            sy = y + ki - (K - 1);
            sx = x + kj - (K - 1);
            if (sy >= 0 && sy < HO && sx >= 0 && sx < HO)
              acc += longint'(E[s][m][sy][sx]) * longint'(W[s][((m*CI+n)*K+(K-1-ki))*K+(K-1-kj)]);
          end
          e = a2d(acc);
        end
        nb_read(s, 0, NBIN_EIN + n * H, 1, y, x, v);
        check($sformatf("conv bw s%0d n%0d (%0d,%0d)", s, n, y, x), v, e);
      end
    end
    for (int j = 0; j < CO*CI*K*K; j++) begin
      longint smu, ssg;
      data_t amu, asg;
      smu = 0; ssg = 0;
      for (int s = 0; s < NSPU; s++) begin
        data_t dm;
        dm = addq(G[s][j], sat(longint'(W[s][j]) * 4));
        smu += dm;
        ssg += mulq(dm, eps_c[s][j]);
      end
      amu = data_t'(smu >>> 4);
      asg = data_t'(ssg >>> 4);
      wpb_read(0, j, v);
      check($sformatf("conv mu %0d", j), v, addq(mu[j], -(amu >>> 4)));
      wpb_read(1, j, v);
      check($sformatf("conv sigma %0d", j), v, addq(sg[j], -(asg >>> 4)));
    end

    // ------------------------------------------------------ mechanisms
    $display("mechanisms: fwd=%0d bwd=%0d rewind=%0d psum=%0d pad=%0d left=%0d up=%0d bcast=%0d loadv=%0d max=%0d relu=%0d upd=%0d",
             n_fwd, n_bwd, n_rewind, n_psum, n_pad, n_left, n_up, n_bcast, n_loadv, n_max, n_relu, n_upd);
    begin
      int mech [12];
      mech = '{n_fwd, n_bwd, n_rewind, n_psum, n_pad, n_left, n_up, n_bcast, n_loadv, n_max, n_relu, n_upd};
      foreach (mech[i]) begin
        checks++;
        if (mech[i] == 0) begin
          failures++;
          $display("mechanism %0d never happened", i);
        end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
