// tb_dm_bnn_ctrl: runs the sequencer alone on a small 12-8-6-3 network
// (T = 3, 2, 2, R = 4 rows per iteration, so layers 0 and 1 need two
// iterations and the last ones are partial) and checks against a model of
// the schedule: the depth-first order of DM passes and which voter feeds
// each pass, the weight addresses, column counts of P and F, beta-memory
// addresses, write and vote commands, ReLU selection, and the exact cycle
// count (2N+5 per iteration, one per pass, one to finish the vote).
module tb_dm_bnn_ctrl;
  import bnn_pkg::*;
  localparam cfg_t LN = '{12, 8, 6};
  localparam cfg_t LM = '{8, 6, 3};
  localparam cfg_t LT = '{3, 2, 2};
  localparam int R = 4, TV = 3;
  localparam int WAW = $clog2(total_words(LN, LM, R));

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, aw_we, pre_start, pre_col_valid, bm_we, g_seed_load, g_advance;
  logic ff_start, ff_col_valid, relu, v_clear, v_acc_en, v_finish;
  logic [WAW-1:0] w_rd_addr;
  logic [1:0] a_rd_bank, aw_bank, a_rd_voter, out_voters;
  logic [3:0] a_rd_idx, aw_base, out_rows, bm_waddr, bm_raddr;
  logic [7:0] cur_layer, cur_block;
  int checks = 0, failures = 0;

  dm_bnn_ctrl #(.LAYER_N(LN), .LAYER_M(LM), .LAYER_T(LT), .R(R), .TV(TV)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  // expected schedule: one entry per iteration
  typedef struct { int l; int b; int vin; } it_t;
  it_t exp_q [$];
  int exp_cycles;

  function automatic int nb(int l); return (LM[l] + R - 1) / R; endfunction
  function automatic int wbase(int l);
    int s = 0;
    for (int i = 0; i < l; i++) s += nb(i) * LN[i];
    return s;
  endfunction

  task automatic add_pass(int l, int vin);
    for (int b = 0; b < nb(l); b++) begin
      it_t e; e.l = l; e.b = b; e.vin = vin;
      exp_q.push_back(e);
      exp_cycles += 2 * LN[l] + 5;
    end
    exp_cycles += 1;
  endtask

  initial begin
    int busy_cycles, p_cols, f_cols, it_idx, votes, writes, seeds;
    logic [WAW-1:0] prev_addr;
    it_t cur;
    exp_cycles = 1;   // the vote-finishing cycle
    add_pass(0, 0);
    for (int i0 = 0; i0 < LT[0]; i0++) begin
      add_pass(1, i0);
      for (int i1 = 0; i1 < LT[1]; i1++) add_pass(2, i1);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk); start = 1;
      #1 check(v_clear, "vote cleared on start");
      @(negedge clk); start = 0;
      busy_cycles = 0; it_idx = -1; votes = 0; writes = 0; seeds = 0; p_cols = 0; f_cols = 0;
      prev_addr = '0;
      while (!done) begin
        #1;
        if (busy) busy_cycles++;
        if (pre_start) begin
          if (it_idx >= 0) begin
            check(p_cols == LN[cur.l] && f_cols == LN[cur.l], $sformatf("column counts it %0d", it_idx));
          end
          it_idx++;
          cur = exp_q[it_idx];
          p_cols = 0; f_cols = 0;
          check(int'(cur_layer) == cur.l && int'(cur_block) == cur.b,
                $sformatf("iteration %0d: layer %0d block %0d, expected %0d %0d", it_idx, cur_layer, cur_block, cur.l, cur.b));
        end
        if (pre_col_valid) begin
          check(int'(prev_addr) == wbase(cur.l) + cur.b * LN[cur.l] + p_cols, $sformatf("weight address it %0d col %0d", it_idx, p_cols));
          check(bm_we && int'(bm_waddr) == p_cols, "beta write address");
          p_cols++;
        end
        if (ff_col_valid) begin
          check(int'(bm_raddr) == f_cols + 1 || f_cols == LN[cur.l] - 1, "beta read address runs ahead by one");
          check(relu == (cur.l != 2), "relu on hidden layers only");
          f_cols++;
        end
        if (pre_col_valid || (busy && it_idx >= 0 && p_cols < LN[cur.l]))
          check(int'(a_rd_bank) == cur.l && (cur.l == 0 || int'(a_rd_voter) == cur.vin),
                $sformatf("input source it %0d", it_idx));
        if (g_seed_load) begin
          seeds++;
          check(ff_start, "accumulators cleared with reseed");
        end
        if (aw_we) begin
          writes++;
          check(cur.l < 2 && int'(aw_bank) == cur.l + 1 && int'(aw_base) == cur.b * R &&
                int'(out_rows) == ((LM[cur.l] - cur.b * R < R) ? LM[cur.l] - cur.b * R : R) &&
                int'(out_voters) == LT[cur.l], $sformatf("hidden write it %0d", it_idx));
        end
        if (v_acc_en) begin
          votes++;
          check(cur.l == 2 && int'(out_voters) == LT[2] && int'(out_rows) == LM[2], "vote command");
        end
        prev_addr = w_rd_addr;
        @(negedge clk);
      end
      check(it_idx == exp_q.size() - 1, $sformatf("iterations %0d of %0d", it_idx + 1, exp_q.size()));
      check(busy_cycles == exp_cycles, $sformatf("cycles %0d expected %0d", busy_cycles, exp_cycles));
      check(votes == LT[0] * LT[1], "one vote per last-layer pass");
      check(seeds == exp_q.size(), "one reseed per iteration");
      check(writes == nb(0) + LT[0] * nb(1), "hidden writes");
      $display("run %0d: %0d iterations, %0d cycles", run, it_idx + 1, busy_cycles);
      repeat (3) @(negedge clk);
      check(done && !busy, "done holds until the next start");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
