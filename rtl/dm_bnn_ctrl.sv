// dm_bnn_ctrl: sequencer of the DM-BNN inference engine.
//
// One DM pass of layer l takes one input vector (x for the first layer,
// otherwise one voter output of layer l-1) and produces T_l voter outputs.
// Following the memory-friendly scheme the M_l output rows are covered in
// ceil(M_l/R) iterations ("blocks"); each iteration runs
//   P_START  clear eta
//   P_RUN    N_l cycles: read sigma/mu column j and input x[j]; one cycle
//            later the pre-compute unit takes them and beta'[:,j] is written
//   P_DRAIN  last pre-compute column
//   F_SEED   reseed every Gaussian generator for (layer, block, voter, lane)
//            and clear the feed-forward accumulators
//   F_RUN    N_l cycles: read beta'[:,j]; one cycle later all TV x R lanes
//            accumulate h * beta'
//   F_DRAIN  last feed-forward column
//   WRITE    store the T_l x R outputs (hidden layer) or add them to the vote
// so one iteration costs 2*N_l + 5 cycles, and a pass adds one NEXT cycle.
//
// DM-BNN forms a tree: every output of layer l is the input of its own DM
// pass of layer l+1. The tree is walked depth first with one index per
// hidden layer (idx[l] = which voter of layer l feeds layer l+1). Because
// the generators are reseeded from (layer, block, voter, lane), the same
// T_l uncertainty matrices are regenerated for every input of layer l, so
// each layer samples only T_l matrices in total. After the last pass the
// vote is finished and done is raised until the next start.
//
// The pass structure, the per-layer T and the row iterations follow the
// paper; the state machine, the cycle budget and the reseeding are this
// design's own.
module dm_bnn_ctrl
  import bnn_pkg::*;
#(
  parameter cfg_t        LAYER_N = DEF_LAYER_N,
  parameter cfg_t        LAYER_M = DEF_LAYER_M,
  parameter cfg_t        LAYER_T = DEF_LAYER_T,
  parameter int unsigned R       = DEF_R,
  parameter int unsigned TV      = DEF_TV,
  localparam int unsigned WORDS  = total_words(LAYER_N, LAYER_M, R),
  localparam int unsigned WAW    = $clog2(WORDS),
  localparam int unsigned MAXN   = max_cfg(LAYER_N),
  localparam int unsigned MAXM   = max_cfg(LAYER_M),
  localparam int unsigned NW     = (MAXN > MAXM) ? MAXN : MAXM,
  localparam int unsigned IW     = $clog2(NW),
  localparam int unsigned BAW    = $clog2(MAXN),
  localparam int unsigned BW     = $clog2(NUM_LAYERS),
  localparam int unsigned VW     = $clog2(TV + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           busy,
  output logic           done,
  // weight memory read
  output logic [WAW-1:0] w_rd_addr,
  // activation buffer read / write
  output logic [BW-1:0]  a_rd_bank,
  output logic [VW-1:0]  a_rd_voter,
  output logic [IW-1:0]  a_rd_idx,
  output logic           aw_we,
  output logic [BW-1:0]  aw_bank,
  output logic [IW-1:0]  aw_base,
  // pre-compute unit and beta memory
  output logic           pre_start,
  output logic           pre_col_valid,
  output logic           bm_we,
  output logic [BAW-1:0] bm_waddr,
  output logic [BAW-1:0] bm_raddr,
  // Gaussian generators and feed-forward unit
  output logic           g_seed_load,
  output logic           g_advance,
  output logic [7:0]     cur_layer,
  output logic [7:0]     cur_block,
  output logic           ff_start,
  output logic           ff_col_valid,
  output logic           relu,
  // rows and voters of the iteration being written
  output logic [VW-1:0]  out_voters,
  output logic [IW-1:0]  out_rows,
  // vote unit
  output logic           v_clear,
  output logic           v_acc_en,
  output logic           v_finish
);

  typedef enum logic [3:0] {
    S_IDLE, S_P_START, S_P_RUN, S_P_DRAIN, S_F_SEED, S_F_RUN, S_F_DRAIN,
    S_WRITE, S_NEXT, S_VOTE, S_DONE
  } state_t;

  localparam int unsigned LAST = NUM_LAYERS - 1;

  state_t         state;
  logic [IW-1:0]  j;
  logic [7:0]     b;
  logic [BW-1:0]  cl;
  logic [VW-1:0]  idx [NUM_LAYERS-1];
  logic           p_vld, f_vld;
  logic [BAW-1:0] p_j;

  int unsigned cur_n, cur_m, cur_t, cur_nb, wbase, rows_left;
  logic        back_found;
  int unsigned back_l;

  always_comb begin
    cur_n = 0; cur_m = 0; cur_t = 0; wbase = 0;
    for (int i = 0; i < NUM_LAYERS; i++) begin
      if (i == int'(cl)) begin
        cur_n = LAYER_N[i]; cur_m = LAYER_M[i]; cur_t = LAYER_T[i];
      end
      if (i < int'(cl)) wbase += nblk(LAYER_M[i], R) * LAYER_N[i];
    end
    cur_nb    = nblk(cur_m, R);
    rows_left = cur_m - int'(b) * R;
    // deepest hidden layer whose voters are not all used up yet
    back_found = 1'b0;
    back_l     = 0;
    for (int l = 0; l < NUM_LAYERS - 1; l++) begin
      if (int'(idx[l]) + 1 < int'(LAYER_T[l])) begin
        back_found = 1'b1;
        back_l     = l;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      j     <= '0;
      b     <= '0;
      cl    <= '0;
      for (int l = 0; l < NUM_LAYERS - 1; l++) idx[l] <= '0;
      p_vld <= 1'b0;
      f_vld <= 1'b0;
      p_j   <= '0;
    end else begin
      p_vld <= (state == S_P_RUN);
      f_vld <= (state == S_F_RUN);
      p_j   <= BAW'(j);
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            cl <= '0;
            b  <= '0;
            for (int l = 0; l < NUM_LAYERS - 1; l++) idx[l] <= '0;
            state <= S_P_START;
          end
        end
        S_P_START: begin
          j     <= '0;
          state <= S_P_RUN;
        end
        S_P_RUN: begin
          j <= j + 1'b1;
          if (int'(j) == cur_n - 1) state <= S_P_DRAIN;
        end
        S_P_DRAIN: state <= S_F_SEED;
        S_F_SEED: begin
          j     <= '0;
          state <= S_F_RUN;
        end
        S_F_RUN: begin
          j <= j + 1'b1;
          if (int'(j) == cur_n - 1) state <= S_F_DRAIN;
        end
        S_F_DRAIN: state <= S_WRITE;
        S_WRITE: begin
          if (int'(b) + 1 < cur_nb) begin
            b     <= b + 1'b1;
            state <= S_P_START;
          end else begin
            state <= S_NEXT;
          end
        end
        S_NEXT: begin
          b <= '0;
          if (int'(cl) < LAST) begin
            idx[cl] <= '0;
            cl      <= cl + 1'b1;
            state   <= S_P_START;
          end else if (back_found) begin
            idx[back_l] <= idx[back_l] + 1'b1;
            cl          <= BW'(back_l + 1);
            state       <= S_P_START;
          end else begin
            state <= S_VOTE;
          end
        end
        S_VOTE: state <= S_DONE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy          = !(state == S_IDLE || state == S_DONE);
    done          = (state == S_DONE);
    w_rd_addr     = WAW'(wbase + int'(b) * cur_n + int'(j));
    a_rd_bank     = cl;
    a_rd_voter    = (cl == '0) ? '0 : idx[cl - 1'b1];
    a_rd_idx      = j;
    pre_start     = (state == S_P_START);
    pre_col_valid = p_vld;
    bm_we         = p_vld;
    bm_waddr      = p_j;
    bm_raddr      = BAW'(j);
    g_seed_load   = (state == S_F_SEED);
    g_advance     = f_vld;
    cur_layer     = 8'(cl);
    cur_block     = b;
    ff_start      = (state == S_F_SEED);
    ff_col_valid  = f_vld;
    relu          = (int'(cl) != LAST);
    out_voters    = VW'(cur_t);
    out_rows      = IW'((rows_left < R) ? rows_left : R);
    aw_we         = (state == S_WRITE) && (int'(cl) != LAST);
    aw_bank       = cl + 1'b1;
    aw_base       = IW'(int'(b) * R);
    v_clear       = (state == S_IDLE || state == S_DONE) && start;
    v_acc_en      = (state == S_WRITE) && (int'(cl) == LAST);
    v_finish      = (state == S_VOTE);
  end

  initial begin
    for (int i = 0; i < NUM_LAYERS; i++) begin
      assert (LAYER_T[i] <= TV) else $error("dm_bnn_ctrl: T of layer %0d exceeds TV", i);
      if (i > 0) assert (LAYER_N[i] == LAYER_M[i-1]) else $error("dm_bnn_ctrl: layer %0d width mismatch", i);
    end
    assert (nblk(LAYER_M[LAST], R) == 1) else $error("dm_bnn_ctrl: last layer must fit one iteration");
  end

endmodule
