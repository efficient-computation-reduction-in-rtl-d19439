// weight_mem: storage for the trained posterior parameters sigma (scale)
// and mu (location) of every layer.
//
// Word w holds one input column of one R-row block: lane r of the word at
// address base(l) + b*N_l + j is the parameter of row b*R + r, column j of
// layer l, where base(l) is the sum of ceil(M_i/R)*N_i over the layers
// before l. Rows past M_l in a layer's last block are stored as zero. A host
// writes sigma and mu words together; the engine reads both with one cycle
// of latency. The address layout and host port are this design's choice.
module weight_mem
  import bnn_pkg::*;
#(
  parameter int unsigned R     = DEF_R,
  parameter int unsigned WORDS = total_words(DEF_LAYER_N, DEF_LAYER_M, DEF_R),
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  data_t         wr_sigma [R],
  input  data_t         wr_mu    [R],
  input  logic [AW-1:0] rd_addr,
  output data_t         rd_sigma [R],
  output data_t         rd_mu    [R]
);

  data_t sigma_mem [WORDS][R];
  data_t mu_mem    [WORDS][R];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      sigma_mem[wr_addr] <= wr_sigma;
      mu_mem[wr_addr]    <= wr_mu;
    end
    rd_sigma <= sigma_mem[rd_addr];
    rd_mu    <= mu_mem[rd_addr];
  end

endmodule
