// grng: Gaussian random number generator with a reversible LFSR.
//
// An N-bit Fibonacci LFSR (R1 .. RN) produces one new bit pattern per step;
// the number of ones in a pattern is binomial B(N, 1/2), which approximates a
// Gaussian N(N/2, N/4). The generator keeps that count in a register instead
// of re-counting the whole pattern with an adder tree: the register starts
// at the count of the seed and is corrected by the one bit that enters and
// the one bit that leaves the register on each step. The output is the count
// minus N/2, turned into Q8.8 and divided by the standard deviation
// sqrt(N)/2 = 2^EPS_SHIFT with an arithmetic right shift, so eps ~ N(0, 1).
//
// Modes (input 'mode', one step per clock while not idle):
//   GRNG_FWD  R1 <= RN ^ RC ^ RB ^ RA, Ri <= R(i-1)            (shift right)
//   GRNG_BWD  RN <= R1 ^ R(A+1) ^ R(B+1) ^ R(C+1), Ri <= R(i+1) (shift left)
//   GRNG_IDLE every register keeps its value
// A backward step exactly undoes the forward step before it, so the patterns
// used during the forward pass are reproduced in reverse order during the
// backward pass without being stored.
//
// Timing: 'eps' and 'pattern' describe the current register contents; after
// a step they change at the next clock edge. Reset loads SEED.
//
// Follows the paper: 256-bit LFSR, three XORs for the forward taps (A, B, C,
// N), the reverse taps R1, R(A+1), R(B+1), R(C+1), the three modes, the
// running-sum epsilon generator and the final right shift. This design's own
// choices: the tap positions (246, 251, 254, 256), taken from the standard
// table of maximal-length 256-bit LFSRs, the seed and the Q8.8 output format.
// The scaled count is wider than the output; its upper bits only carry sign
// copies (|eps| <= 128 * 32), so lint reports them as unused.
module grng
  import sbnn_pkg::*;
#(
  parameter int unsigned      N         = LFSR_N,
  parameter int unsigned      TA        = 246,
  parameter int unsigned      TB        = 251,
  parameter int unsigned      TC        = 254,
  parameter int unsigned      EPS_SHIFT = 3,
  parameter logic [N-1:0]     SEED      = N'(grng_seed(0, 0))
) (
  input  logic        clk,
  input  logic        rst_n,
  input  grng_mode_e  mode,
  output data_t       eps,
  output logic [N:1]  pattern
);

  localparam int unsigned SW = $clog2(N + 1) + 1;   // signed width of the centred count

  function automatic logic signed [SW-1:0] seed_sum();
    int unsigned c;
    c = 0;
    for (int i = 0; i < N; i++) c += 32'(SEED[i]);
    return SW'(c) - SW'(N / 2);
  endfunction

  logic [N:1]            r;
  logic signed [SW-1:0]  sum_q;    // number of ones minus N/2
  logic                  fwd_bit;  // new R1 in forward mode
  logic                  bwd_bit;  // new RN in backward mode

  assign fwd_bit = ((r[N] ^ r[TC]) ^ r[TB]) ^ r[TA];
  assign bwd_bit = ((r[1] ^ r[TA+1]) ^ r[TB+1]) ^ r[TC+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r     <= SEED;
      sum_q <= seed_sum();
    end else begin
      unique case (mode)
        GRNG_FWD: begin
          r     <= {r[N-1:1], fwd_bit};
          sum_q <= sum_q + SW'(fwd_bit) - SW'(r[N]);
        end
        GRNG_BWD: begin
          r     <= {bwd_bit, r[N:2]};
          sum_q <= sum_q + SW'(bwd_bit) - SW'(r[1]);
        end
        default: ;
      endcase
    end
  end

  // eps = (count - N/2) in Q8.8, divided by 2^EPS_SHIFT.
  logic signed [DW+SW-1:0] scaled;
  assign scaled  = ($signed({{DW{sum_q[SW-1]}}, sum_q}) <<< FRAC) >>> EPS_SHIFT;
  assign eps     = scaled[DW-1:0];
  assign pattern = r;

endmodule
