// dm_bnn_top: Bayesian neural network inference engine using feature
// decomposition and memorization (DM-BNN).
//
// A BNN weight is w = sigma*h + mu with h ~ N(0,1). Instead of sampling
// every weight matrix and multiplying it with the input, each layer first
// memorizes beta = sigma (x) x (element-wise, one row per output) and
// eta = mu . x, and every voter then only needs y_t = <H_t, beta>_L + eta.
// Every layer is evaluated this way: one input vector gives T_l outputs,
// each of which is the input of a DM pass of the next layer, so the
// default 784-200-200-10 network with T = 10, 10, 5 yields 500 voters.
// Their last-layer outputs are averaged into y_bar (mean) and the largest
// mean is reported as the class (cls).
//
// Blocks: dm_bnn_ctrl (sequencer), weight_mem (sigma, mu), act_buffer
// (input and hidden voter outputs), precompute_unit (P), beta_mem
// (memorized beta' of one iteration, R x N), TV x R grng instances (S),
// feedforward_unit (F), vote_unit (V). One P and one F unit serve all
// layers; R rows of a layer are handled per iteration (memory-friendly
// scheme, R = alpha*M = 20).
//
// Use: with start low, write all sigma/mu words (w_we, see weight_mem for
// the layout) and the input vector (x_we), then pulse start for one
// cycle. busy stays high while the engine runs; done rises when mean and
// cls are valid and stays high until the next start. Per iteration of
// layer l the engine needs 2*N_l + 5 cycles, plus one cycle per DM pass,
// one cycle to finish the vote and one to leave the start state. Weights
// and the input may not be written while busy.
module dm_bnn_top
  import bnn_pkg::*;
#(
  parameter cfg_t        LAYER_N   = DEF_LAYER_N,
  parameter cfg_t        LAYER_M   = DEF_LAYER_M,
  parameter cfg_t        LAYER_T   = DEF_LAYER_T,
  parameter int unsigned R         = DEF_R,
  parameter int unsigned TV        = DEF_TV,
  parameter int unsigned CLT_TERMS = 12,
  localparam int unsigned WORDS    = total_words(LAYER_N, LAYER_M, R),
  localparam int unsigned WAW      = $clog2(WORDS),
  localparam int unsigned MAXN     = max_cfg(LAYER_N),
  localparam int unsigned MAXM     = max_cfg(LAYER_M),
  localparam int unsigned NW       = (MAXN > MAXM) ? MAXN : MAXM,
  localparam int unsigned IW       = $clog2(NW),
  localparam int unsigned MOUT     = LAYER_M[NUM_LAYERS-1],
  localparam int unsigned TOTAL    = prod_cfg(LAYER_T),
  localparam int unsigned CW       = (MOUT > 1) ? $clog2(MOUT) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // host load port
  input  logic           w_we,
  input  logic [WAW-1:0] w_addr,
  input  data_t          w_sigma [R],
  input  data_t          w_mu    [R],
  input  logic           x_we,
  input  logic [IW-1:0]  x_addr,
  input  data_t          x_data,
  input  logic [31:0]    seed_base,
  // control and result
  input  logic           start,
  output logic           busy,
  output logic           done,
  output data_t          mean [MOUT],
  output logic [CW-1:0]  cls
);

  localparam int unsigned BAW = $clog2(MAXN);
  localparam int unsigned BW  = $clog2(NUM_LAYERS);
  localparam int unsigned VW  = $clog2(TV + 1);
  localparam int unsigned OW  = $clog2(MOUT + 1);

  logic [WAW-1:0] w_rd_addr;
  logic [BW-1:0]  a_rd_bank, aw_bank;
  logic [VW-1:0]  a_rd_voter, out_voters;
  logic [IW-1:0]  a_rd_idx, aw_base, out_rows;
  logic           aw_we, pre_start, pre_col_valid, bm_we;
  logic [BAW-1:0] bm_waddr, bm_raddr;
  logic           g_seed_load, g_advance, ff_start, ff_col_valid, relu;
  logic [7:0]     cur_layer, cur_block;
  logic           v_clear, v_acc_en, v_finish, v_done, c_done;

  data_t sigma_col [R];
  data_t mu_col    [R];
  data_t beta_wr   [R];
  data_t beta_rd   [R];
  acc_t  eta       [R];
  data_t x_j;
  data_t h   [TV][R];
  data_t y   [TV][R];
  acc_t  sum [MOUT];

  dm_bnn_ctrl #(
    .LAYER_N(LAYER_N), .LAYER_M(LAYER_M), .LAYER_T(LAYER_T), .R(R), .TV(TV)
  ) u_ctrl (
    .clk, .rst_n, .start, .busy, .done(c_done),
    .w_rd_addr, .a_rd_bank, .a_rd_voter, .a_rd_idx, .aw_we, .aw_bank, .aw_base,
    .pre_start, .pre_col_valid, .bm_we, .bm_waddr, .bm_raddr,
    .g_seed_load, .g_advance, .cur_layer, .cur_block, .ff_start, .ff_col_valid, .relu,
    .out_voters, .out_rows, .v_clear, .v_acc_en, .v_finish
  );

  weight_mem #(.R(R), .WORDS(WORDS)) u_wmem (
    .clk, .wr_en(w_we), .wr_addr(w_addr), .wr_sigma(w_sigma), .wr_mu(w_mu),
    .rd_addr(w_rd_addr), .rd_sigma(sigma_col), .rd_mu(mu_col)
  );

  act_buffer #(
    .NBUF(NUM_LAYERS - 1), .TV(TV), .R(R), .MAXM(MAXM), .MAXN(MAXN)
  ) u_abuf (
    .clk, .x_we, .x_waddr(x_addr), .x_wdata(x_data),
    .we(aw_we), .wbank(aw_bank), .wvoters(out_voters), .wbase(aw_base), .wrows(out_rows),
    .wdata(y), .rd_bank(a_rd_bank), .rd_voter(a_rd_voter), .rd_idx(a_rd_idx), .rdata(x_j)
  );

  precompute_unit #(.R(R)) u_pre (
    .clk, .rst_n, .start(pre_start), .col_valid(pre_col_valid),
    .sigma_col, .mu_col, .x_j, .beta_col(beta_wr), .eta
  );

  beta_mem #(.R(R), .DEPTH(MAXN)) u_beta (
    .clk, .we(bm_we), .waddr(bm_waddr), .wdata(beta_wr), .raddr(bm_raddr), .rdata(beta_rd)
  );

  for (genvar t = 0; t < TV; t++) begin : g_voter
    for (genvar r = 0; r < R; r++) begin : g_lane
      grng #(.CLT_TERMS(CLT_TERMS)) u_grng (
        .clk, .rst_n, .seed_load(g_seed_load),
        .seed(grng_seed(seed_base, cur_layer, cur_block, 8'(t), 8'(r))),
        .advance(g_advance), .h(h[t][r])
      );
    end
  end

  feedforward_unit #(.TV(TV), .R(R)) u_ff (
    .clk, .rst_n, .start(ff_start), .col_valid(ff_col_valid),
    .h, .beta_col(beta_rd), .eta, .relu, .y
  );

  vote_unit #(.MOUT(MOUT), .TV(TV), .R(R), .TOTAL(TOTAL)) u_vote (
    .clk, .rst_n, .clear(v_clear), .acc_en(v_acc_en), .nvoters(out_voters),
    .base(OW'(aw_base)), .nrows(OW'(out_rows)), .y, .finish(v_finish),
    .sum, .mean, .cls, .done(v_done)
  );

  assign done = c_done && v_done;

endmodule
