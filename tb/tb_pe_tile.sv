// tb_pe_tile: checks the 4x4 PE tile: the up/left shift chain between the
// PEs, the operand each PE sees, and the partial-sum row selection.
//
// A model of the 16 Reg-H / Reg-V pairs and 16 accumulators runs next to the
// tile. Each cycle a random shift mode is applied with random data on the
// right edge (from the shift-unit array) and on the bottom edge (from the
// buffer), together with a random PE operation using per-PE weights. In UP
// mode PE (r, c) must take Reg-V of PE (r+1, c), the bottom row the bottom
// input; in LEFT mode it must take Reg-H of PE (r, c+1), the right column the
// right input. PSUM must load only PE row psum_row, column c from psum[c].
module tb_pe_tile;
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

  shift_e shift;
  pe_op_e op;
  data_t  right_in [TILE], bottom_in [TILE], load [NPE], w [NPE], psum [TILE], out [NPE];
  logic   load_en [NPE];
  logic [1:0] psum_row;
  logic   relu;
  acc_t   acc [NPE];
  pe_tile u_dut (.clk, .rst_n, .shift, .op, .right_in, .bottom_in, .load, .load_en, .w,
                 .psum, .psum_row, .relu, .out, .acc);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    data_t h [NPE], v [NPE], hn [NPE], vn [NPE];
    int    a [NPE];
    shift = SH_HOLD; op = PE_NOP; psum_row = 0; relu = 0;
    for (int i = 0; i < TILE; i++) begin right_in[i] = 0; bottom_in[i] = 0; psum[i] = 0; end
    for (int p = 0; p < NPE; p++) begin load[p] = 0; load_en[p] = 0; w[p] = 0; h[p] = 0; v[p] = 0; a[p] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      // favour the two modes the convolution uses
      shift = shift_e'((i % 7 < 3) ? SH_LEFT : (i % 7 < 5) ? SH_UP : $urandom_range(0, 5));
      op    = pe_op_e'($urandom_range(0, 5));
      psum_row = 2'($urandom_range(0, 3));
      for (int k = 0; k < TILE; k++) begin
        right_in[k]  = data_t'($signed($urandom_range(0, 2048)) - 1024);
        bottom_in[k] = data_t'($signed($urandom_range(0, 2048)) - 1024);
        psum[k]      = data_t'($signed($urandom_range(0, 2048)) - 1024);
      end
      for (int p = 0; p < NPE; p++) begin
        load[p] = data_t'($signed($urandom_range(0, 2048)) - 1024);
        load_en[p] = $urandom_range(0, 1);
        w[p] = data_t'($signed($urandom_range(0, 512)) - 256);
      end
      for (int p = 0; p < NPE; p++) begin
        int r, c;
        r = p / TILE; c = p % TILE;
        unique case (op)
          PE_MUL:  a[p] = int'(w[p]) * int'(h[p]);
          PE_MAC:  a[p] = a[p] + int'(w[p]) * int'(h[p]);
          PE_PSUM: if (r == psum_row) a[p] = int'(psum[c]) * 256;
          PE_MAXF: a[p] = int'(h[p]) * 256;
          PE_MAX:  if (int'(h[p]) * 256 > a[p]) a[p] = int'(h[p]) * 256;
          default: ;
        endcase
        hn[p] = h[p]; vn[p] = v[p];
        unique case (shift)
          SH_LEFT:  hn[p] = (c == TILE - 1) ? right_in[r] : h[p + 1];
          SH_UP:    begin
            hn[p] = (r == TILE - 1) ? bottom_in[c] : v[p + TILE];
            vn[p] = hn[p];
          end
          SH_BCAST, SH_LOADV_LO, SH_LOADV_HI:
            if (shift == SH_BCAST || load_en[p]) begin hn[p] = load[p]; vn[p] = load[p]; end
          default: ;
        endcase
      end
      h = hn; v = vn;
      @(negedge clk);
      for (int p = 0; p < NPE; p++) begin
        check($sformatf("acc %0d", p), acc[p], a[p]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
