// tb_grng: checks the reversible LFSR Gaussian random number generator.
//
// Part 1 uses an 8-bit register with taps 4, 5, 6, 8 and the start pattern
// 00001111 (R1..R8). Three forward shifts must give 10000111, 01000011 and
// 10100001, and three backward shifts must retrace them back to the start
// pattern. Part 2 uses the full 256-bit generator: a reference register kept
// in the testbench is stepped forward at random times, eps is compared with
// (number of ones - 128) scaled to Q8.8 and divided by 8, and then the same
// number of backward steps must reproduce every eps in reverse order. One
// step is taken per clock cycle, and the idle mode must hold the state.
module tb_grng;
  import sbnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("MISMATCH %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // ------------------------------------------------ 8-bit register of the example
  grng_mode_e m8;
  data_t      e8;
  logic [8:1] p8;
  grng #(.N(8), .TA(4), .TB(5), .TC(6), .SEED(8'b1111_0000)) u_small (
    .clk, .rst_n, .mode(m8), .eps(e8), .pattern(p8)
  );

  // ------------------------------------------------ full-size generator
  grng_mode_e m;
  data_t      e;
  logic [LFSR_N:1] p;
  localparam logic [LFSR_N-1:0] S = grng_seed(5, 9);
  grng #(.SEED(S)) u_full (.clk, .rst_n, .mode(m), .eps(e), .pattern(p));

  // R1..R8 as written in the example, left to right
  function automatic logic [7:0] r1_to_r8(logic [8:1] v);
    return {v[1], v[2], v[3], v[4], v[5], v[6], v[7], v[8]};
  endfunction

  initial begin
    logic [7:0] expect_p [4];
    logic [255:0] ref_r;
    data_t hist [$];
    int steps;
    expect_p = '{8'b00001111, 8'b10000111, 8'b01000011, 8'b10100001};
    m8 = GRNG_IDLE;
    m  = GRNG_IDLE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // part 1
    check("small start", r1_to_r8(p8), expect_p[0]);
    check("small eps start", e8, 0);
    for (int i = 1; i < 4; i++) begin
      m8 = GRNG_FWD;
      @(negedge clk);
      check($sformatf("small fwd %0d", i), r1_to_r8(p8), expect_p[i]);
      check($sformatf("small eps fwd %0d", i), e8, ($countones(p8) - 4) * 256 / 8);
    end
    m8 = GRNG_IDLE;
    repeat (3) @(negedge clk);
    check("small idle", r1_to_r8(p8), expect_p[3]);
    for (int i = 2; i >= 0; i--) begin
      m8 = GRNG_BWD;
      @(negedge clk);
      check($sformatf("small bwd %0d", i), r1_to_r8(p8), expect_p[i]);
    end
    m8 = GRNG_IDLE;

    // part 2
    ref_r = S;
    check("full start", p, ref_r);
    steps = 0;
    for (int i = 0; i < 600; i++) begin
      if ($urandom_range(0, 3) != 0) begin
        logic nb;
        hist.push_back(e);
        m = GRNG_FWD;
        @(negedge clk);
        nb = ref_r[255] ^ ref_r[253] ^ ref_r[250] ^ ref_r[245];
        ref_r = {ref_r[254:0], nb};
        steps++;
        check("full fwd pattern", p, ref_r);
        check("full fwd eps", e, ($countones(ref_r) - 128) * 32);
      end else begin
        m = GRNG_IDLE;
        @(negedge clk);
        check("full idle pattern", p, ref_r);
      end
    end
    for (int i = 0; i < steps; i++) begin
      m = GRNG_BWD;
      @(negedge clk);
      check("full bwd eps", e, hist.pop_back());
    end
    m = GRNG_IDLE;
    @(negedge clk);
    check("full back at seed", p, S);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
