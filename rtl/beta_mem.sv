// beta_mem: local memory for the memorized feature beta' of one iteration.
//
// With the memory-friendly scheme only alpha*M rows of beta are live at a
// time, so the memory holds DEPTH columns of R 8-bit entries (default
// 784 x 20, i.e. alpha*M x N for the first layer) instead of M x N. One
// R-wide column is written per cycle by the pre-compute stage and read per
// cycle by the feed-forward stage. Read data is registered (one cycle of
// latency). Written as an array; a real chip would use an SRAM macro.
module beta_mem
  import bnn_pkg::*;
#(
  parameter int unsigned R     = DEF_R,
  parameter int unsigned DEPTH = 784,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata [R],
  input  logic [AW-1:0] raddr,
  output data_t         rdata [R]
);

  data_t mem [DEPTH][R];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
