// lane_mem: NPE-lane memory with one word per lane per entry.
//
// Lane l of entry a holds linear element a * NPE + l. All lanes are read at
// one common entry address (result one cycle later); every lane has its own
// write enable and write address, so NPE consecutive linear elements that
// straddle two entries can be written in one cycle.
//
// Used for both sub-buffers of the weight parameter buffer (mu, sigma) and
// for the per-SPU gradient buffer. Each lane is a simple dual-port RAM.
module lane_mem
  import sbnn_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic            clk,
  input  logic [WAW-1:0]  raddr,
  output data_t           rdata [NPE],
  input  logic            we    [NPE],
  input  logic [WAW-1:0]  waddr [NPE],
  input  data_t           wdata [NPE]
);

  for (genvar l = 0; l < NPE; l++) begin : g_lane
    logic [DW-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we[l]) mem[waddr[l]] <= wdata[l];
      rdata[l] <= mem[raddr];
    end
  end

endmodule
