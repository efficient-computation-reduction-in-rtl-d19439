// tb_dm_bnn_full: end-to-end test of the DM-BNN engine at its default size: the 784-200-200-10
// network with T = 10, 10, 5 (500 voters), R = 20 and 10 voter lanes.
//
// The testbench draws random sigma, mu and inputs, loads them through the
// host port, runs inference and compares the result with a reference model
// written directly from the DM equations: per layer T_l uncertainty
// matrices H_lt are drawn once (from the same seeded central-limit streams
// the engine uses) and shared by every input of that layer; each DM pass
// computes beta = sigma (x) x and eta = mu . x once and then
// y_t = act(<H_t, beta>_L + eta) for every voter; the last-layer outputs of
// all voters are averaged. Checked: the mean, the class, the vote sums, the
// stored hidden outputs of the last passes, and the cycle count
// (2*N_l + 5 per iteration, one per pass, two per run).
// It also counts how often each mechanism occurred: multi-iteration
// (memory-friendly) layers, partial row blocks, generator reseeds, reuse of
// a layer's uncertainty matrices for a new input, tree backtracking,
// partial voter sets, ReLU clamping and the vote; one that never occurs is
// a failure.
module tb_dm_bnn_full;
  import bnn_pkg::*;
  import bnn_ref_pkg::*;

  localparam cfg_t LN = DEF_LAYER_N;
  localparam cfg_t LM = DEF_LAYER_M;
  localparam cfg_t LT = DEF_LAYER_T;
  localparam int R = DEF_R, TV = DEF_TV;
  localparam int L     = NUM_LAYERS;
  localparam int WORDS = total_words(LN, LM, R);
  localparam int WAW   = $clog2(WORDS);
  localparam int MAXN  = max_cfg(LN);
  localparam int MAXM  = max_cfg(LM);
  localparam int NW    = (MAXN > MAXM) ? MAXN : MAXM;
  localparam int IW    = $clog2(NW);
  localparam int MOUT  = LM[L-1];
  localparam int TOTAL = prod_cfg(LT);
  localparam int CW    = (MOUT > 1) ? $clog2(MOUT) : 1;
  localparam int MAXT  = max_cfg(LT);
  localparam int unsigned SEED = 32'h5EED_0042;

  logic clk = 0, rst_n = 0, w_we = 0, x_we = 0, start = 0, busy, done;
  logic [WAW-1:0] w_addr = '0;
  logic [IW-1:0] x_addr = '0;
  data_t w_sigma [R], w_mu [R], x_data, mean [MOUT];
  logic [CW-1:0] cls;
  logic [31:0] seed_base = SEED;
  int checks = 0, failures = 0;

  dm_bnn_top dut (
    .clk, .rst_n, .w_we, .w_addr, .w_sigma, .w_mu, .x_we, .x_addr, .x_data,
    .seed_base, .start, .busy, .done, .mean, .cls
  );

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  // ---------------- reference model ----------------
  byte sg [L][MAXM][MAXN];
  byte mu [L][MAXM][MAXN];
  byte hm [L][MAXT][MAXM][MAXN];
  byte xin [MAXN];
  byte out0 [MAXT][MAXM];
  byte out1 [MAXT][MAXM];
  byte out2 [MAXT][MAXM];
  longint ref_sum [MOUT];
  int relu_clamps;

  function automatic int nb(int l); return (LM[l] + R - 1) / R; endfunction
  function automatic int wbase(int l);
    int s = 0;
    for (int i = 0; i < l; i++) s += nb(i) * LN[i];
    return s;
  endfunction

  // The T_l uncertainty matrices of layer l: row b*R+r of H_lt is the
  // stream seeded with (layer, block, voter, lane).
  task automatic draw_h();
    for (int l = 0; l < L; l++)
      for (int t = 0; t < LT[l]; t++)
        for (int i = 0; i < LM[l]; i++) begin
          longint unsigned st = ref_mix(ref_seed(SEED, l, i / R, t, i % R));
          for (int j = 0; j < LN[l]; j++) begin
            hm[l][t][i][j] = byte'(ref_sample(st, 12));
            st = ref_step(st);
          end
        end
  endtask

  // One DM pass: in -> T_l outputs.
  task automatic dm_pass(input int l, input byte in [MAXN], output byte o [MAXT][MAXM]);
    byte beta [MAXN];
    for (int i = 0; i < LM[l]; i++) begin
      longint eta = 0;
      for (int j = 0; j < LN[l]; j++) begin
        eta += longint'(mu[l][i][j]) * longint'(in[j]);
        beta[j] = byte'(ref_sat(ref_asr(longint'(sg[l][i][j]) * longint'(in[j]), W_FRAC)));
      end
      for (int t = 0; t < LT[l]; t++) begin
        longint z = 0, q;
        for (int j = 0; j < LN[l]; j++) z += longint'(hm[l][t][i][j]) * longint'(beta[j]);
        q = ref_asr((z << (W_FRAC - H_FRAC)) + eta, W_FRAC);
        if (l != L - 1 && q < 0) begin q = 0; relu_clamps++; end
        o[t][i] = byte'(ref_sat(q));
      end
    end
  endtask

  task automatic reference();
    byte in [MAXN];
    for (int i = 0; i < MOUT; i++) ref_sum[i] = 0;
    dm_pass(0, xin, out0);
    for (int i0 = 0; i0 < LT[0]; i0++) begin
      for (int j = 0; j < MAXN; j++) in[j] = (j < MAXM) ? out0[i0][j] : 8'sd0;
      dm_pass(1, in, out1);
      for (int i1 = 0; i1 < LT[1]; i1++) begin
        for (int j = 0; j < MAXN; j++) in[j] = (j < MAXM) ? out1[i1][j] : 8'sd0;
        dm_pass(2, in, out2);
        for (int t = 0; t < LT[2]; t++)
          for (int i = 0; i < MOUT; i++) ref_sum[i] += longint'(out2[t][i]);
      end
    end
  endtask

  function automatic int exp_cycles();
    int passes = 1, c = 0;
    for (int l = 0; l < L; l++) begin
      c += passes * (nb(l) * (2 * LN[l] + 5) + 1);
      passes *= LT[l];
    end
    return c + 2;
  endfunction

  // snapshot of the hidden outputs held in the activation buffer
  localparam int NBLK = (MAXM + R - 1) / R;
  byte hid [TV][L-1][NBLK*R];
  event snap_ev;
  for (genvar gt = 0; gt < TV; gt++) begin : g_snap
    always @(snap_ev)
      for (int k = 0; k < (L - 1) * NBLK; k++)
        for (int r = 0; r < R; r++)
          hid[gt][k / NBLK][(k % NBLK) * R + r] = dut.u_abuf.g_voter[gt].hmem[k][r];
  end

  // ---------------- mechanism counters ----------------
  int n_iter_multi, n_partial_rows, n_reseed, n_h_reuse, n_backtrack, n_partial_voters, n_vote;
  int passes_of [L];
  logic [7:0] last_layer;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.pre_start && dut.cur_block == 8'd1) n_iter_multi++;
    if (dut.u_ctrl.pre_start && dut.cur_block == 8'd0) begin
      passes_of[dut.cur_layer]++;
      if (dut.cur_layer != 0 && passes_of[dut.cur_layer] > 1) n_h_reuse++;
      if (dut.cur_layer < last_layer) n_backtrack++;
      last_layer <= dut.cur_layer;
    end
    if ((dut.aw_we || dut.v_acc_en) && int'(dut.out_rows) < R) n_partial_rows++;
    if ((dut.aw_we || dut.v_acc_en) && int'(dut.out_voters) < TV) n_partial_voters++;
    if (dut.g_seed_load) n_reseed++;
    if (dut.v_finish) n_vote++;
  end

  initial begin
    int cyc;
    int smax = (LN[0] > 100) ? 7 : 40;
    int mmax = (LN[0] > 100) ? 6 : 40;
    for (int r = 0; r < R; r++) begin w_sigma[r] = 0; w_mu[r] = 0; end
    x_data = 0;
    last_layer = 0;
    foreach (passes_of[l]) passes_of[l] = 0;
    for (int l = 0; l < L; l++)
      for (int i = 0; i < MAXM; i++)
        for (int j = 0; j < MAXN; j++) begin
          sg[l][i][j] = byte'($urandom_range(0, smax));
          mu[l][i][j] = byte'(int'($urandom_range(0, 2 * mmax)) - mmax);
        end
    draw_h();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load sigma and mu
    for (int l = 0; l < L; l++)
      for (int b = 0; b < nb(l); b++)
        for (int j = 0; j < LN[l]; j++) begin
          @(negedge clk);
          w_we = 1; w_addr = WAW'(wbase(l) + b * LN[l] + j);
          for (int r = 0; r < R; r++) begin
            automatic int i = b * R + r;
            w_sigma[r] = (i < LM[l]) ? sg[l][i][j] : 8'sd0;
            w_mu[r]    = (i < LM[l]) ? mu[l][i][j] : 8'sd0;
          end
        end
    @(negedge clk); w_we = 0;
    for (int run = 0; run < 1; run++) begin
      for (int j = 0; j < MAXN; j++) xin[j] = (j < LN[0]) ? byte'($urandom_range(0, 63)) : 8'sd0;
      for (int j = 0; j < LN[0]; j++) begin
        @(negedge clk); x_we = 1; x_addr = IW'(j); x_data = xin[j];
      end
      @(negedge clk); x_we = 0;
      relu_clamps = 0;
      reference();
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      $display("run %0d: %0d cycles (expected %0d), class %0d", run, cyc, exp_cycles(), cls);
      check(cyc == exp_cycles(), $sformatf("cycle count %0d vs %0d", cyc, exp_cycles()));
      begin
        automatic int best = 0;
        for (int i = 0; i < MOUT; i++) begin
          check(longint'(dut.u_vote.sum[i]) == ref_sum[i], $sformatf("vote sum %0d: %0d vs %0d", i, dut.u_vote.sum[i], ref_sum[i]));
          check(int'(mean[i]) == int'(ref_sum[i] / TOTAL), $sformatf("mean %0d: %0d vs %0d", i, mean[i], ref_sum[i] / TOTAL));
          if (ref_sum[i] > ref_sum[best]) best = i;
        end
        check(int'(cls) == best, $sformatf("class %0d vs %0d", cls, best));
      end
      // hidden outputs left in the buffer: all of layer 0, last pass of layer 1
      -> snap_ev;
      #1;
      for (int t = 0; t < LT[0]; t++)
        for (int i = 0; i < LM[0]; i++)
          check(hid[t][0][i] == out0[t][i], $sformatf("layer-0 output voter %0d row %0d", t, i));
      for (int t = 0; t < LT[1]; t++)
        for (int i = 0; i < LM[1]; i++)
          check(hid[t][1][i] == out1[t][i], $sformatf("layer-1 output voter %0d row %0d", t, i));
      $write("mean:");
      for (int i = 0; i < MOUT; i++) $write(" %0d", mean[i]);
      $display("");
    end
    $display("mechanisms: multi-iteration %0d, partial rows %0d, reseeds %0d, H reuse %0d, backtracks %0d, partial voters %0d, relu clamps %0d, votes %0d",
             n_iter_multi, n_partial_rows, n_reseed, n_h_reuse, n_backtrack, n_partial_voters, relu_clamps, n_vote);
    check(n_iter_multi > 0, "memory-friendly multi-iteration layer occurred");
    check(n_partial_rows > 0, "partial row block occurred");
    check(n_reseed > 0, "generator reseed occurred");
    check(n_h_reuse > 0, "uncertainty-matrix reuse occurred");
    check(n_backtrack > 0, "tree backtrack occurred");
    check(n_partial_voters > 0, "partial voter set occurred");
    check(relu_clamps > 0, "ReLU clamp occurred");
    check(n_vote == 1, "vote finished once per run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
