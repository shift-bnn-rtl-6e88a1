// tb_pe: checks one processing element (shift unit plus multiply-accumulate
// datapath) against a model.
//
// Each cycle applies a random shift mode with random neighbour data and a
// random PE operation with a random weight and partial sum. The model keeps
// Reg-H, Reg-V and the 32-bit accumulator: MUL and MAC add w * nin (MAC to
// the old value), PSUM loads psum << 8 when psum_sel is set, MAXF loads
// nin << 8 and MAX keeps the larger. The output is the accumulator shifted
// back to Q8.8 with saturation, clipped at zero when relu is set.
module tb_pe;
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
  data_t  from_right, from_below, load, nout, w, psum, out;
  logic   load_en, psum_sel, relu;
  acc_t   acc;
  pe u_dut (.clk, .rst_n, .shift, .from_right, .from_below, .load, .load_en, .nout,
            .op, .w, .psum, .psum_sel, .relu, .acc, .out);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic longint to_q88(int a);
    longint v;
    v = longint'(a) >>> 8;
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  initial begin
    data_t h, v;
    int    a;
    longint o;
    shift = SH_HOLD; op = PE_NOP; from_right = 0; from_below = 0; load = 0;
    load_en = 0; w = 0; psum = 0; psum_sel = 0; relu = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    h = 0; v = 0; a = 0;
    for (int i = 0; i < 3000; i++) begin
      shift      = shift_e'($urandom_range(0, 5));
      op         = pe_op_e'($urandom_range(0, 5));
      from_right = data_t'($signed($urandom_range(0, 4096)) - 2048);
      from_below = data_t'($signed($urandom_range(0, 4096)) - 2048);
      load       = data_t'($signed($urandom_range(0, 4096)) - 2048);
      w          = data_t'($signed($urandom_range(0, 1024)) - 512);
      psum       = data_t'($urandom);
      if (i % 50 == 0) begin w = data_t'($urandom); from_right = data_t'($urandom); end
      load_en    = $urandom_range(0, 1);
      psum_sel   = $urandom_range(0, 1);
      relu       = $urandom_range(0, 1);
      #1;
      o = to_q88(a);
      if (relu && o < 0) o = 0;
      check("out", out, o);
      check("nout", nout, (shift == SH_LEFT) ? h : v);
      // the PE uses the neuron held before this cycle's shift
      unique case (op)
        PE_MUL:  a = int'(w) * int'(h);
        PE_MAC:  a = a + int'(w) * int'(h);
        PE_PSUM: if (psum_sel) a = int'(psum) * 256;
        PE_MAXF: a = int'(h) * 256;
        PE_MAX:  if (int'(h) * 256 > a) a = int'(h) * 256;
        default: ;
      endcase
      unique case (shift)
        SH_LEFT:  h = from_right;
        SH_UP:    begin h = from_below; v = from_below; end
        SH_BCAST: begin h = load; v = load; end
        SH_LOADV_LO, SH_LOADV_HI: if (load_en) begin h = load; v = load; end
        default: ;
      endcase
      @(negedge clk);
      check("acc", acc, a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
