// tb_controller: checks the micro-operation sequences of the controller.
//
// Each layer-stage instruction is issued once and the micro-operation
// stream is monitored until 'done'. Checks:
//   * instr_ready drops while the instruction runs, 'done' pulses once;
//   * conv forward: the first and last ci*k*k GRNG forward steps read the
//     kernels of the first and last output channel in weight order,
//     the net number of forward minus backward steps is co*ci*k*k (the
//     rewinds between tiles cancel exactly), and every output neuron of
//     every channel is written, none outside the map;
//   * conv backward: the net number of backward steps is the same, and the
//     first and last backward steps read the weights of the last and first
//     error channel in exactly the reverse order;
//   * FC forward / backward: one all-slice step per (group, input) pair, and
//     the backward steps read the entries in reverse order;
//   * pooling: one output write per window row, max operations present;
//   * conv GC: every kernel-gradient entry is written exactly once.
module tb_controller;
  import sbnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  instr_t instr;
  logic   instr_valid, instr_ready, done;
  uop_t   uop;
  controller u_dut (.clk, .rst_n, .instr, .instr_valid, .instr_ready, .done, .uop);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 30) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ------------------------------------------------------------- monitor
  int n_fwd, n_bwd, n_done, n_max, n_gbw;
  int fwd_idx [$], bwd_idx [$];
  logic s1_bwd;
  wb_rd_t s1_wrd;
  bit written [int];
  bit gwritten [int];
  int out_of_map;
  int dh_e, dw_e, dp_e, dbase_e, dmap_e;

  always @(posedge clk) if (rst_n) begin
    if (uop.grng_fwd) begin
      n_fwd++;
      fwd_idx.push_back(uop.wrd.all ? int'(uop.wrd.addr) : int'(uop.wrd.addr) * 16 + int'(uop.wrd.lane));
    end
    // the backward step happens one stage later, on the entry read with it
    if (s1_bwd) begin
      n_bwd++;
      bwd_idx.push_back(s1_wrd.all ? int'(s1_wrd.addr) : int'(s1_wrd.addr) * 16 + int'(s1_wrd.lane));
    end
    s1_bwd <= uop.grng_bwd;
    s1_wrd <= uop.wrd;
    if (done) n_done++;
    if (uop.pe_op == PE_MAX) n_max++;
    if (uop.nbw.en)
      for (int c = 0; c < TILE; c++) begin
        int x, y, key;
        x = int'(uop.nbw.x0) + c;
        y = int'(uop.nbw.y);
        if (x < int'(uop.nbw.w) && y < int'(uop.nbw.h)) begin
          if (uop.nbw.sub) begin
            if (x % 2 == 0 && y % 2 == 0) begin x = x / 2; y = y / 2; end else continue;
          end
          key = (int'(uop.nbw.base) + y * int'(uop.nbw.pitch) + x / 8) * 8 + x % 8;
          written[key] = 1;
          if (int'(uop.nbw.base) < dbase_e || int'(uop.nbw.base) >= dbase_e + dmap_e) out_of_map++;
        end
      end
    if (uop.gbw.en && !uop.gbw.all)
      for (int c = 0; c < TILE; c++)
        if (c < uop.gbw.ncol) begin
          int j;
          j = int'(uop.gbw.j0) + c;
          if (gwritten.exists(j)) out_of_map++;
          gwritten[j] = 1;
          n_gbw++;
        end
  end

  task automatic run(instr_t in);
    int cyc;
    n_fwd = 0; n_bwd = 0; n_done = 0; n_max = 0; n_gbw = 0; out_of_map = 0;
    fwd_idx.delete(); bwd_idx.delete(); written.delete(); gwritten.delete();
    @(negedge clk);
    check("ready before", instr_ready, 1);
    instr = in;
    instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    check("ready while busy", instr_ready, 0);
    cyc = 0;
    while (!done && cyc < 20000) begin @(negedge clk); cyc++; end
    @(negedge clk);
    @(negedge clk);
    check("done once", n_done, 1);
    check("ready after", instr_ready, 1);
  endtask

  initial begin
    instr_t in;
    int CI, CO, K, H, DH, NT;
    instr = '0; instr_valid = 0; s1_bwd = 0; s1_wrd = '0;
    dbase_e = 0; dmap_e = 1 << 20;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- conv forward: 3 -> 2 channels, 5x5 kernel, 11x9 map
    CI = 3; CO = 2; K = 5;
    in = '0;
    in.op = OP_CONV_FW; in.k = 3'(K); in.ci = CHW'(CI); in.co = CHW'(CO);
    in.src_h = 11; in.src_w = 9; in.src_sel = 0; in.src_base = 0;
    in.dst_sel = 1; in.dst_base = 100; in.w_base = 40; in.relu = 1;
    dbase_e = 100; dmap_e = CO * 7 * 1;
    run(in);
    check("fw net steps", n_fwd - n_bwd, CO * CI * K * K);
    // output channel a is finished over all tiles before a + 1 starts: the
    // first ci*k*k steps are the kernels of channel 0, the last those of co-1
    for (int k = 0; k < CI * K * K; k++) begin
      check("fw weight order first", fwd_idx[k], 40 + k);
      check("fw weight order last", fwd_idx[fwd_idx.size() - CI * K * K + k], 40 + (CO - 1) * CI * K * K + k);
    end
    check("fw outputs written", written.size(), CO * 7 * 5);
    check("fw writes outside the map", out_of_map, 0);

    // ---------------- conv backward: errors of 2 channels (5x5) to 3 channels, pad 2
    in = '0;
    in.op = OP_CONV_BW; in.k = 3; in.pad = 2; in.ci = 2; in.co = 3;
    in.src_h = 5; in.src_w = 5; in.src_sel = 1; in.src_base = 0;
    in.dst_sel = 0; in.dst_base = 200; in.w_base = 16; in.update = 1;
    dbase_e = 200; dmap_e = 3 * 7;
    run(in);
    check("bw net steps", n_bwd - n_fwd, 2 * 3 * 9);
    // error channel m = 1 first, then m = 0; within one m every kernel is
    // regenerated in exactly the reverse of the forward order
    for (int k = 0; k < 3 * 9; k++) begin
      check("bw weight order first", bwd_idx[k], 16 + 2 * 3 * 9 - 1 - k);
      check("bw weight order last", bwd_idx[bwd_idx.size() - 3 * 9 + k], 16 + 3 * 9 - 1 - k);
    end
    check("bw outputs written", written.size(), 3 * 7 * 7);
    check("bw writes outside the map", out_of_map, 0);

    // ---------------- FC forward / backward: 10 -> 20
    NT = 2;
    in = '0;
    in.op = OP_FC_FW; in.ci = 10; in.co = 20; in.src_h = 1; in.src_w = 10;
    in.dst_sel = 1; in.dst_base = 300; in.w_base = 256;
    dbase_e = 300; dmap_e = 3;
    run(in);
    check("fc fw steps", n_fwd, NT * 10);
    check("fc fw no backward", n_bwd, 0);
    for (int k = 0; k < NT * 10; k++) check("fc fw entry order", fwd_idx[k], 16 + k);
    check("fc fw outputs", written.size(), 20);
    in.op = OP_FC_BW; in.update = 1; in.aux_sel = 1; in.aux_base = 0;
    run(in);
    check("fc bw steps", n_bwd, NT * 10);
    for (int k = 0; k < NT * 10; k++) check("fc bw entry order", bwd_idx[k], 16 + NT * 10 - 1 - k);

    // ---------------- pooling 2x2 on 2 channels of 6x6
    in = '0;
    in.op = OP_POOL; in.k = 2; in.ci = 2; in.co = 2; in.src_h = 6; in.src_w = 6;
    in.src_sel = 1; in.src_base = 0; in.dst_sel = 1; in.dst_base = 400;
    dbase_e = 400; dmap_e = 2 * 3;
    run(in);
    check("pool outputs", written.size(), 2 * 3 * 3);
    check("pool uses max", n_max > 0, 1);
    check("pool no grng", n_fwd + n_bwd, 0);

    // ---------------- conv GC: 2 error maps 5x5 over 3 input maps 7x7 -> 3x3 kernels
    in = '0;
    in.op = OP_CONV_GC; in.k = 3; in.ci = 3; in.co = 2; in.src_h = 7; in.src_w = 7;
    in.src_sel = 0; in.aux_sel = 1; in.aux_base = 0; in.aux_h = 5; in.aux_w = 5; in.g_base = 16;
    run(in);
    check("gc gradients", n_gbw, 2 * 3 * 9);
    check("gc duplicate gradients", out_of_map, 0);
    for (int j = 16; j < 16 + 2 * 3 * 9; j++) check("gc gradient index", gwritten.exists(j), 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
