// nbuf: neuron buffer (one instance is NBin, one is NBout) of an SPU.
//
// The buffer has NB_BANKS = 8 banks. A feature map of width W is stored row
// by row; neuron (y, x) lives in bank x % 8 at word base + y * pitch + x / 8,
// with pitch = ceil(W / 8). Because eight consecutive neurons of a row always
// fall into eight different banks, one read returns the eight neurons
// (y, x0 .. x0+7) for any x0, which is what one upward move of the PE tile
// plus the shift-unit array consumes. Coordinates outside the map (negative,
// or beyond h / w) read as zero, which implements zero padding.
//
// Ports:
//   rd  (nb_rd_t)   row read; rdata[l] is neuron (y, x0 + l) one cycle later
//   wr  (nb_wr_t) + wdata[c]   writes neurons (y, x0 + c), c = 0..3, of one PE
//                   row; with wr.sub only even (y, x) are kept, at (y/2, x/2)
//   host_*          word access from the external memory interface; a host
//                   write takes priority over wr, a host read is served when
//                   rd.en is low (result on rdata[0] next cycle)
// Each bank is a simple dual-port RAM (one read, one write per cycle).
//
// Follows the paper: multiple banks, each serving the PE rows through the
// crossbar, uniform data organisation so that NBin/NBout can swap roles.
// This design's choice: column interleaving (the paper gives no mapping),
// the padding logic, and the depth, which fills the 48 BRAM36 blocks that
// one SPU's NBin and NBout use together (48 x 2048 x 18 bit / 2 / 8 banks =
// 6144 words per bank).
// The request structs are shared with the controller; the fields this
// buffer does not need (the select bit, the low bits of the aligned write
// column) show up as unused bits in lint.
module nbuf
  import sbnn_pkg::*;
#(
  parameter int unsigned DEPTH = 6144
) (
  input  logic              clk,
  input  nb_rd_t            rd,
  output data_t             rdata [NB_BANKS],
  input  nb_wr_t            wr,
  input  data_t             wdata [TILE],
  input  logic              host_we,
  input  logic              host_re,
  input  logic [2:0]        host_bank,
  input  logic [NBAW-1:0]   host_addr,
  input  data_t             host_wdata
);

  localparam int unsigned AW = NBAW;

  // ------------------------------------------------------------ read side
  logic [AW-1:0]  raddr  [NB_BANKS];
  logic           rvalid [NB_BANKS];   // per lane
  logic           rhost;

  always_comb begin
    for (int b = 0; b < NB_BANKS; b++) begin
      logic [2:0]              l;
      logic signed [DIMW+1:0]  x;
      l = 3'(b) - 3'(rd.x0);
      x = (DIMW+2)'(rd.x0) + (DIMW+2)'(l);
      raddr[b] = AW'(rd.base + AW'(rd.y) * rd.pitch + AW'(x >>> 3));
      if (!rd.en && host_re) raddr[b] = host_addr;
    end
    for (int l = 0; l < NB_BANKS; l++) begin
      logic signed [DIMW+1:0] x;
      x = (DIMW+2)'(rd.x0) + (DIMW+2)'(l);
      rvalid[l] = rd.y >= 0 && rd.y < $signed({1'b0, rd.h}) && x >= 0 &&
                  x < $signed({2'b0, rd.w});
    end
  end

  logic [DW-1:0] bank_q [NB_BANKS];
  logic          valid_q [NB_BANKS];
  logic [2:0]    rsh_q, hbank_q;

  // ----------------------------------------------------------- write side
  logic          bwe   [NB_BANKS];
  logic [AW-1:0] bwa   [NB_BANKS];
  logic [DW-1:0] bwd   [NB_BANKS];

  always_comb begin
    logic [DIMW-1:0] x, dx, dy;
    logic            keep;
    x = '0; dx = '0; dy = '0; keep = 1'b0;
    for (int b = 0; b < NB_BANKS; b++) begin
      bwe[b] = 1'b0;
      bwa[b] = '0;
      bwd[b] = '0;
    end
    if (host_we) begin
      bwe[host_bank] = 1'b1;
      bwa[host_bank] = host_addr;
      bwd[host_bank] = host_wdata;
    end else if (wr.en) begin
      for (int c = 0; c < TILE; c++) begin
        x    = wr.x0 + DIMW'(c);
        keep = (x < wr.w) && (wr.y < wr.h) && !(wr.sub && (x[0] || wr.y[0]));
        dx   = wr.sub ? (x >> 1) : x;
        dy   = wr.sub ? (wr.y >> 1) : wr.y;
        if (keep) begin
          bwe[dx[2:0]] = 1'b1;
          bwa[dx[2:0]] = AW'(wr.base + AW'(dy) * wr.pitch + AW'(dx >> 3));
          bwd[dx[2:0]] = wdata[c];
        end
      end
    end
  end

  for (genvar b = 0; b < NB_BANKS; b++) begin : g_bank
    logic [DW-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (bwe[b]) mem[bwa[b]] <= bwd[b];
      bank_q[b]  <= mem[raddr[b]];
      valid_q[b] <= rvalid[b];
    end
  end

  always_ff @(posedge clk) begin
    rsh_q   <= rd.x0[2:0];
    rhost   <= !rd.en && host_re;
    hbank_q <= host_bank;
  end

  always_comb begin
    for (int l = 0; l < NB_BANKS; l++) begin
      logic [2:0] b;
      b = rsh_q + 3'(l);
      rdata[l] = valid_q[l] ? bank_q[b] : '0;
    end
    if (rhost) rdata[0] = bank_q[hbank_q];
  end

endmodule
