// tb_crossbar: checks the routing of the SPU crossbar (combinational).
//
// Random buffer words, WPB / gradient lanes, sampled weights and PE results
// are applied together with random micro-operations for the three stages.
// Every output is compared with the routing rule written out independently:
// row and broadcast selection between NBin and NBout, the load values and
// load enables of the vector-load and broadcast modes, the slice inputs (all
// lanes in FC mode, one selected lane into slice 0 in conv mode), the PE
// weight selection, the partial sums, the gradient lanes and the write data
// for the neuron and gradient buffers (conv: up to four consecutive linear
// indices that may straddle two entries; FC: a whole entry).
module tb_crossbar;
  import sbnn_pkg::*;

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

  uop_t  s1, s2, s3;
  data_t nbin_rd [NB_BANKS], nbout_rd [NB_BANKS], wpb_mu [NPE], wpb_sg [NPE], gb_rd [NPE];
  data_t row [NB_BANKS], bcast, load [NPE], fu_mu [NPE], fu_sg [NPE], fu_dw [NPE];
  logic  load_en [NPE];
  data_t w_samp_q [NPE], elem_q, row_q [NB_BANKS], fu_dmu [NPE], fu_dsg [NPE];
  logic  fu_vld [NPE];
  data_t pe_w [NPE], psum [TILE], dmu [NPE], dsg [NPE];
  logic  dvld [NPE];
  data_t pe_out [NPE], nb_wdata [TILE];
  logic  gb_we [NPE];
  logic [WAW-1:0] gb_waddr [NPE];
  data_t gb_wdata [NPE];

  crossbar u_dut (.*);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int it = 0; it < 3000; it++) begin
      s1 = uop_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      s2 = uop_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      s3 = uop_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      s1.shift = shift_e'($urandom_range(0, 5));
      s2.wsel  = wsel_e'($urandom_range(0, 2));
      s3.gbw.ncol = 3'($urandom_range(0, 4));
      for (int l = 0; l < NB_BANKS; l++) begin
        nbin_rd[l] = data_t'($urandom); nbout_rd[l] = data_t'($urandom); row_q[l] = data_t'($urandom);
      end
      for (int p = 0; p < NPE; p++) begin
        wpb_mu[p] = data_t'($urandom); wpb_sg[p] = data_t'($urandom); gb_rd[p] = data_t'($urandom);
        w_samp_q[p] = data_t'($urandom); fu_dmu[p] = data_t'($urandom); fu_dsg[p] = data_t'($urandom);
        fu_vld[p] = $urandom_range(0, 1); pe_out[p] = data_t'($urandom);
      end
      elem_q = data_t'($urandom);
      #1;
      // S1
      for (int l = 0; l < NB_BANKS; l++) check("row", row[l], s1.rda.sel ? nbout_rd[l] : nbin_rd[l]);
      check("bcast", bcast, s1.rdb.sel ? nbout_rd[0] : nbin_rd[0]);
      for (int p = 0; p < NPE; p++) begin
        int src;
        check("load", load[p], (s1.shift == SH_BCAST) ? bcast : (s1.rda.sel ? nbout_rd[p % 8] : nbin_rd[p % 8]));
        check("load_en", load_en[p], (s1.shift == SH_LOADV_LO && p < 8) || (s1.shift == SH_LOADV_HI && p >= 8));
        src = (!s1.wrd.all && p == 0) ? int'(s1.wrd.lane) : p;
        check("fu_mu", fu_mu[p], wpb_mu[src]);
        check("fu_sg", fu_sg[p], wpb_sg[src]);
        check("fu_dw", fu_dw[p], gb_rd[src]);
      end
      // S2
      for (int p = 0; p < NPE; p++) begin
        check("pe_w", pe_w[p], (s2.wsel == W_SAMP_LANE) ? w_samp_q[p] :
                               (s2.wsel == W_NB_ELEM) ? elem_q : w_samp_q[0]);
        check("dmu", dmu[p], s2.wrd.all ? fu_dmu[p] : fu_dmu[0]);
        check("dsg", dsg[p], s2.wrd.all ? fu_dsg[p] : fu_dsg[0]);
        check("dvld", dvld[p], s2.wrd.all ? fu_vld[p] : (fu_vld[0] && s2.wrd.lane == p));
      end
      for (int c = 0; c < TILE; c++) check("psum", psum[c], row_q[c]);
      // S3
      for (int c = 0; c < TILE; c++) check("nb_wdata", nb_wdata[c], pe_out[s3.nbw.row * TILE + c]);
      for (int l = 0; l < NPE; l++) begin
        logic ewe;
        int   ea;
        data_t ed;
        ewe = 0; ea = s3.gbw.addr; ed = pe_out[l];
        if (s3.gbw.en && s3.gbw.all) ewe = 1;
        else if (s3.gbw.en)
          for (int c = 0; c < TILE; c++) begin
            int j;
            j = int'(s3.gbw.j0) + c;
            if (c < s3.gbw.ncol && (j % 16) == l) begin
              ewe = 1; ea = (j / 16) % (1 << WAW); ed = pe_out[s3.gbw.row * TILE + c];
            end
          end
        check("gb_we", gb_we[l], ewe);
        if (ewe) begin
          check("gb_waddr", gb_waddr[l], ea);
          check("gb_wdata", gb_wdata[l], ed);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
