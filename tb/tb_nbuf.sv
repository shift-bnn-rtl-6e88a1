// tb_nbuf: checks the 8-bank neuron buffer: the column-interleaved layout,
// unaligned row reads, zero padding, PE-row writes with bounds masking and
// 2x2 subsampling, and the host port.
//
// A model array holds the word in every bank. Random PE-row writes are
// applied through 'wr' (with and without 'sub'), host writes are mixed in,
// and after each write cycle a random row read (y, x0) is issued, including
// coordinates above, below, left and right of the map. The eight neurons
// returned one cycle later must match the model, and every out-of-map
// neuron must read as zero. At the end, host reads are compared as well.
module tb_nbuf;
  import sbnn_pkg::*;

  localparam int DEPTH = 256;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  nb_rd_t rd;
  nb_wr_t wr;
  data_t  rdata [NB_BANKS], wdata [TILE], host_wdata;
  logic   host_we, host_re;
  logic [2:0] host_bank;
  logic [NBAW-1:0] host_addr;
  nbuf #(.DEPTH(DEPTH)) u_dut (.clk, .rd, .rdata, .wr, .wdata, .host_we, .host_re, .host_bank,
                               .host_addr, .host_wdata);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  data_t mem [NB_BANKS][DEPTH];

  // one map: 'base' words, pitch ceil(w/8), h rows
  int base, pitch, h, w;

  initial begin
    rd = '0; wr = '0; host_we = 0; host_re = 0; host_bank = 0; host_addr = 0; host_wdata = 0;
    for (int c = 0; c < TILE; c++) wdata[c] = 0;
    for (int b = 0; b < NB_BANKS; b++) for (int a = 0; a < DEPTH; a++) mem[b][a] = 0;
    @(negedge clk);
    // clear the memory through the host port so that model and buffer agree
    for (int b = 0; b < NB_BANKS; b++) for (int a = 0; a < DEPTH; a++) begin
      host_we = 1; host_bank = 3'(b); host_addr = NBAW'(a); host_wdata = 0;
      @(negedge clk);
    end
    host_we = 0;

    for (int it = 0; it < 4000; it++) begin
      int ry, rx0, np;
      int pb [TILE], pa [TILE];
      data_t pv [TILE];
      logic sub;
      if (it % 500 == 0) begin
        w = $urandom_range(3, 20);
        h = $urandom_range(2, 9);
        pitch = (w + 7) / 8;
        base = $urandom_range(0, DEPTH - h * pitch);
      end
      // write phase
      sub = ($urandom_range(0, 3) == 0);
      wr = '0;
      wr.en = 1; wr.base = NBAW'(base); wr.pitch = NBAW'(pitch);
      wr.y = DIMW'($urandom_range(0, h + 1)); wr.x0 = DIMW'($urandom_range(0, w + 1));
      wr.h = DIMW'(sub ? 2 * h : h); wr.w = DIMW'(sub ? 2 * w : w); wr.sub = sub;
      if (sub) begin wr.y = DIMW'($urandom_range(0, 2 * h)); wr.x0 = DIMW'(4 * $urandom_range(0, w / 2)); end
      for (int c = 0; c < TILE; c++) wdata[c] = data_t'($urandom);
      host_we = ($urandom_range(0, 9) == 0);
      host_bank = 3'($urandom_range(0, 7));
      host_addr = NBAW'($urandom_range(0, DEPTH - 1));
      host_wdata = data_t'($urandom);
      np = 0;
      if (host_we) begin pb[0] = host_bank; pa[0] = host_addr; pv[0] = host_wdata; np = 1; end
      else
        for (int c = 0; c < TILE; c++) begin
          int x, y, dx, dy;
          x = int'(wr.x0) + c; y = int'(wr.y);
          if (x < int'(wr.w) && y < int'(wr.h) && !(sub && (x % 2 == 1 || y % 2 == 1))) begin
            dx = sub ? x / 2 : x; dy = sub ? y / 2 : y;
            pb[np] = dx % 8; pa[np] = base + dy * pitch + dx / 8; pv[np] = wdata[c]; np++;
          end
        end
      // read request in the same cycle
      ry  = $signed($urandom_range(0, h + 3)) - 2;
      rx0 = $signed($urandom_range(0, w + 9)) - 8;
      rd = '0;
      rd.en = 1; rd.base = NBAW'(base); rd.pitch = NBAW'(pitch);
      rd.y = (DIMW+1)'(ry); rd.x0 = (DIMW+1)'(rx0); rd.h = DIMW'(h); rd.w = DIMW'(w);
      @(posedge clk);
      #1;
      wr.en = 0; host_we = 0;
      for (int l = 0; l < NB_BANKS; l++) begin
        int x;
        x = rx0 + l;
        if (ry >= 0 && ry < h && x >= 0 && x < w)
          check($sformatf("read y%0d x%0d", ry, x), rdata[l], mem[x % 8][base + ry * pitch + x / 8]);
        else
          check($sformatf("pad y%0d x%0d", ry, x), rdata[l], 0);
      end
      // a read in the same cycle as a write returns the old word
      for (int k = 0; k < np; k++) mem[pb[k]][pa[k]] = pv[k];
      @(negedge clk);
    end
    // host reads
    rd = '0;
    for (int i = 0; i < 200; i++) begin
      host_re = 1;
      host_bank = 3'($urandom_range(0, 7));
      host_addr = NBAW'($urandom_range(0, DEPTH - 1));
      @(posedge clk);
      #1;
      check("host read", rdata[0], mem[host_bank][host_addr]);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
