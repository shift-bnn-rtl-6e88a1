// tb_shift_array: checks the 4x4 array of shift units that sits to the right
// of the PE tile and extends each PE row into an 8-neuron shift chain.
//
// A model of the 16 Reg-H / Reg-V pairs is updated with random modes and
// data: UP takes Reg-V of the unit below (bottom row: the buffer word
// bottom_in[c]), LEFT takes Reg-H of the unit to the right (right column:
// zero), BCAST loads every unit with the broadcast neuron. left_out[r], the
// neuron passed to PE row r, must be the leftmost unit's Reg-H in LEFT mode
// and its Reg-V otherwise; it is checked before every clock edge.
module tb_shift_array;
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
  data_t  bottom_in [TILE], bcast, left_out [TILE];
  shift_array u_dut (.clk, .rst_n, .shift, .bottom_in, .bcast, .left_out);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    data_t h [NPE], v [NPE], hn [NPE], vn [NPE];
    shift = SH_HOLD; bcast = 0;
    for (int c = 0; c < TILE; c++) bottom_in[c] = 0;
    for (int p = 0; p < NPE; p++) begin h[p] = 0; v[p] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      shift = shift_e'((i % 5 < 2) ? SH_LEFT : (i % 5 < 4) ? SH_UP : $urandom_range(0, 3));
      bcast = data_t'($urandom);
      for (int c = 0; c < TILE; c++) bottom_in[c] = data_t'($urandom);
      #1;
      for (int r = 0; r < TILE; r++)
        check($sformatf("left_out %0d", r), left_out[r],
              (shift == SH_LEFT) ? h[r * TILE] : v[r * TILE]);
      for (int p = 0; p < NPE; p++) begin
        int r, c;
        r = p / TILE; c = p % TILE;
        hn[p] = h[p]; vn[p] = v[p];
        unique case (shift)
          SH_LEFT:  hn[p] = (c == TILE - 1) ? data_t'(0) : h[p + 1];
          SH_UP:    begin hn[p] = (r == TILE - 1) ? bottom_in[c] : v[p + TILE]; vn[p] = hn[p]; end
          SH_BCAST: begin hn[p] = bcast; vn[p] = bcast; end
          default: ;
        endcase
      end
      h = hn; v = vn;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
