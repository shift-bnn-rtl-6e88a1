// tb_shift_unit: checks one shift unit (Reg-H, Reg-V) against a model.
//
// Random modes and inputs are applied for many cycles. The model: LEFT loads
// Reg-H from the right neighbour and keeps Reg-V; UP loads both from the
// unit below; BCAST loads both from 'load'; LOADV_* loads both from 'load'
// when load_en is set; HOLD keeps both. nin must equal Reg-H; nout must be
// Reg-H in LEFT mode and Reg-V otherwise (checked combinationally).
module tb_shift_unit;
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

  shift_e mode;
  data_t  from_right, from_below, load, nin, nout;
  logic   load_en;
  shift_unit u_dut (.clk, .rst_n, .mode, .from_right, .from_below, .load, .load_en, .nin, .nout);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    data_t h, v;
    mode = SH_HOLD; from_right = 0; from_below = 0; load = 0; load_en = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    h = 0; v = 0;
    for (int i = 0; i < 3000; i++) begin
      mode       = shift_e'($urandom_range(0, 5));
      from_right = data_t'($urandom);
      from_below = data_t'($urandom);
      load       = data_t'($urandom);
      load_en    = $urandom_range(0, 1);
      #1;
      check("nout", nout, (mode == SH_LEFT) ? h : v);
      unique case (mode)
        SH_LEFT:  h = from_right;
        SH_UP:    begin h = from_below; v = from_below; end
        SH_BCAST: begin h = load; v = load; end
        SH_LOADV_LO, SH_LOADV_HI: if (load_en) begin h = load; v = load; end
        default: ;
      endcase
      @(negedge clk);
      check("nin", nin, h);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
