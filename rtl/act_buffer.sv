// act_buffer: input vector and hidden-layer voter outputs.
//
// Bank 0 holds the network input x (MAXN entries, written by the host one
// byte at a time). Banks 1..NBUF hold the T outputs of hidden layer
// 1..NBUF: TV voters x MAXM rows. In the DM-BNN flow each of those outputs
// later becomes the single input of a DM pass of the next layer, so the
// engine walks the voter tree depth first and needs only one set of T
// outputs per hidden layer. Each voter has its own memory of R-byte words
// (one word per row block and bank) with a write enable per byte. The write
// port stores one iteration at once: rows wbase .. wbase+wrows-1 (wbase a
// multiple of R) of voters 0 .. wvoters-1. The read port returns one byte
// (bank rd_bank, voter rd_voter, index rd_idx) with one cycle of latency.
// This buffer organisation is this design's choice.
module act_buffer
  import bnn_pkg::*;
#(
  parameter int unsigned NBUF = NUM_LAYERS - 1,
  parameter int unsigned TV   = DEF_TV,
  parameter int unsigned R    = DEF_R,
  parameter int unsigned MAXM = 200,
  parameter int unsigned MAXN = 784,
  localparam int unsigned NW  = (MAXN > MAXM) ? MAXN : MAXM,
  localparam int unsigned IW  = $clog2(NW),
  localparam int unsigned BW  = $clog2(NBUF + 1),
  localparam int unsigned VW  = $clog2(TV + 1)
) (
  input  logic          clk,
  // host write of the input vector
  input  logic          x_we,
  input  logic [IW-1:0] x_waddr,
  input  data_t         x_wdata,
  // engine write of one iteration of hidden outputs
  input  logic          we,
  input  logic [BW-1:0] wbank,       // 1 .. NBUF
  input  logic [VW-1:0] wvoters,
  input  logic [IW-1:0] wbase,
  input  logic [IW-1:0] wrows,
  input  data_t         wdata [TV][R],
  // engine read
  input  logic [BW-1:0] rd_bank,     // 0 = input vector
  input  logic [VW-1:0] rd_voter,
  input  logic [IW-1:0] rd_idx,
  output data_t         rdata
);

  localparam int unsigned NBLK = (MAXM + R - 1) / R;
  localparam int unsigned LW   = (R > 1) ? $clog2(R) : 1;

  data_t xmem [MAXN];
  data_t x_q;
  data_t word_q [TV][R];
  logic  rd_x_q;
  logic [VW-1:0] rd_voter_q;
  logic [LW-1:0] rd_lane_q;

  // word address of a hidden entry: bank, then row block
  int unsigned wword, rword;
  always_comb begin
    wword = (int'(wbank) - 1) * NBLK + int'(wbase) / R;
    rword = (rd_bank == '0) ? 0 : (int'(rd_bank) - 1) * NBLK + int'(rd_idx) / R;
  end

  always_ff @(posedge clk) begin
    if (x_we) xmem[x_waddr] <= x_wdata;
    x_q        <= xmem[rd_idx];
    rd_x_q     <= (rd_bank == '0);
    rd_voter_q <= rd_voter;
    rd_lane_q  <= LW'(int'(rd_idx) % R);
  end

  // one memory of R-byte words per voter, with a write enable per byte
  for (genvar t = 0; t < TV; t++) begin : g_voter
    data_t hmem [NBUF*NBLK][R];
    always_ff @(posedge clk) begin
      if (we && VW'(t) < wvoters)
        for (int r = 0; r < R; r++)
          if (IW'(r) < wrows) hmem[wword][r] <= wdata[t][r];
      word_q[t] <= hmem[rword];
    end
  end

  assign rdata = rd_x_q ? x_q : word_q[rd_voter_q][rd_lane_q];

  initial assert (NBUF >= 1) else $error("act_buffer: needs at least one hidden bank");

endmodule
