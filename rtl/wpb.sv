// wpb: weight parameter buffer, shared by all SPUs.
//
// Two sub-buffers hold mu and sigma separately. Each is organised in
// entries of NPE = 16 lanes, lane l of entry a holding weight a * 16 + l; an
// entry is the weights of one PE row per bank (4 banks x 4 lanes).
// Convolution weights are stored in their natural order, index
// ((m * N + n) * K + ki) * K + kj; a convolution reads one lane per cycle
// (the crossbar picks it). FC weight (o, i) is stored at entry
// (o / 16) * N + i, lane o % 16, so one read gives the 16 weights of the
// 16 output neurons computed at once.
//
// Ports:
//   rd_addr -> mu[l], sigma[l]   all 16 lanes of an entry, one cycle later
//   upd_we[l], upd_addr          write back updated mu/sigma (same entry)
//   host_*                       loading from the external memory; a host
//                                write takes the write port and an update in
//                                the same cycle is dropped (the host loads
//                                only while the controller is idle)
//
// Follows the paper: a WPB split into a mu and a sigma sub-buffer, each of
// several banks, each bank entry holding weights for a PE row, one weight
// per cycle selected for convolution, a whole entry for an FC layer. The
// depth (4096 entries = 65536 weights per sub-buffer) is this design's
// choice; the paper gives no WPB size.
module wpb
  import sbnn_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic            clk,
  input  logic [WAW-1:0]  rd_addr,
  output data_t           mu    [NPE],
  output data_t           sigma [NPE],
  input  logic            upd_we [NPE],
  input  logic [WAW-1:0]  upd_addr,
  input  data_t           upd_mu    [NPE],
  input  data_t           upd_sigma [NPE],
  input  logic            host_we,
  input  logic            host_sel,     // 0: mu, 1: sigma
  input  logic [3:0]      host_lane,
  input  logic [WAW-1:0]  host_addr,
  input  data_t           host_wdata
);

  logic           we_mu [NPE], we_sg [NPE];
  logic [WAW-1:0] wa    [NPE];
  data_t          wd_mu [NPE], wd_sg [NPE];

  always_comb begin
    for (int l = 0; l < NPE; l++) begin
      if (host_we) begin
        we_mu[l] = !host_sel && host_lane == 4'(l);
        we_sg[l] =  host_sel && host_lane == 4'(l);
        wa[l]    = host_addr;
        wd_mu[l] = host_wdata;
        wd_sg[l] = host_wdata;
      end else begin
        we_mu[l] = upd_we[l];
        we_sg[l] = upd_we[l];
        wa[l]    = upd_addr;
        wd_mu[l] = upd_mu[l];
        wd_sg[l] = upd_sigma[l];
      end
    end
  end

  lane_mem #(.DEPTH(DEPTH)) u_mu (
    .clk, .raddr(rd_addr), .rdata(mu), .we(we_mu), .waddr(wa), .wdata(wd_mu)
  );
  lane_mem #(.DEPTH(DEPTH)) u_sigma (
    .clk, .raddr(rd_addr), .rdata(sigma), .we(we_sg), .waddr(wa), .wdata(wd_sg)
  );

endmodule
