// tb_wpb: checks the weight parameter buffer (mu and sigma sub-buffers,
// 16 lanes each).
//
// The host port fills a region of both sub-buffers one word at a time; the
// update port then rewrites random lanes of random entries, and reads of
// random entries must return all 16 lanes of mu and sigma one cycle after
// the address, matching a model array. In a cycle with a host write the
// update is not performed (the host owns the write port).
module tb_wpb;
  import sbnn_pkg::*;

  localparam int DEPTH = 64;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [WAW-1:0] rd_addr, upd_addr, host_addr;
  data_t mu [NPE], sigma [NPE], upd_mu [NPE], upd_sigma [NPE], host_wdata;
  logic  upd_we [NPE], host_we, host_sel;
  logic [3:0] host_lane;
  wpb #(.DEPTH(DEPTH)) u_dut (.clk, .rd_addr, .mu, .sigma, .upd_we, .upd_addr, .upd_mu, .upd_sigma,
                              .host_we, .host_sel, .host_lane, .host_addr, .host_wdata);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  data_t mm [DEPTH][NPE], ms [DEPTH][NPE];

  initial begin
    rd_addr = 0; upd_addr = 0; host_addr = 0; host_we = 0; host_sel = 0; host_lane = 0; host_wdata = 0;
    for (int l = 0; l < NPE; l++) begin upd_we[l] = 0; upd_mu[l] = 0; upd_sigma[l] = 0; end
    @(negedge clk);
    // host fill
    for (int a = 0; a < DEPTH; a++) for (int l = 0; l < NPE; l++) for (int s = 0; s < 2; s++) begin
      host_we = 1; host_sel = s[0]; host_lane = 4'(l); host_addr = WAW'(a);
      host_wdata = data_t'($urandom);
      if (s == 0) mm[a][l] = host_wdata; else ms[a][l] = host_wdata;
      @(negedge clk);
    end
    host_we = 0;
    // updates, reads and collisions
    for (int i = 0; i < 3000; i++) begin
      int ra;
      ra = $urandom_range(0, DEPTH - 1);
      rd_addr  = WAW'(ra);
      upd_addr = WAW'($urandom_range(0, DEPTH - 1));
      for (int l = 0; l < NPE; l++) begin
        upd_we[l] = $urandom_range(0, 1);
        upd_mu[l] = data_t'($urandom);
        upd_sigma[l] = data_t'($urandom);
      end
      host_we = ($urandom_range(0, 7) == 0);
      host_sel = $urandom_range(0, 1);
      host_lane = 4'($urandom_range(0, 15));
      host_addr = upd_addr;
      host_wdata = data_t'($urandom);
      @(posedge clk);
      #1;
      for (int l = 0; l < NPE; l++) begin
        check("mu", mu[l], mm[ra][l]);
        check("sigma", sigma[l], ms[ra][l]);
      end
      // a host write owns the write port for its cycle; the update is dropped
      if (host_we) begin
        if (host_sel) ms[host_addr][host_lane] = host_wdata;
        else          mm[host_addr][host_lane] = host_wdata;
      end else begin
        for (int l = 0; l < NPE; l++) if (upd_we[l]) begin
          mm[upd_addr][l] = upd_mu[l];
          ms[upd_addr][l] = upd_sigma[l];
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
