// tb_vote_unit: feeds random voter outputs (several voters per cycle, a
// partial voter count and a partial row block) into a 5-output vote unit,
// then checks the sums, the means (sum / TOTAL, truncated toward zero),
// the class (index of the largest sum) and that clear restarts the vote.
module tb_vote_unit;
  import bnn_pkg::*;
  localparam int MOUT = 5, TV = 3, R = 3, TOTAL = 7;

  logic clk = 0, rst_n = 0, clear = 0, acc_en = 0, finish = 0, done;
  logic [1:0] nvoters = 0;
  logic [2:0] base = 0, nrows = 0;
  data_t y [TV][R], mean [MOUT];
  acc_t sum [MOUT];
  logic [2:0] cls;
  int checks = 0, failures = 0;

  vote_unit #(.MOUT(MOUT), .TV(TV), .R(R), .TOTAL(TOTAL)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    longint ms [MOUT];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      int best;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      check(!done, "clear drops done");
      for (int i = 0; i < MOUT; i++) ms[i] = 0;
      // voters: 3 + 3 + 1 on rows 0..2 and rows 3..4
      for (int step = 0; step < 6; step++) begin
        automatic int nv = (step < 4) ? 3 : 1;
        automatic int b = (step % 2 == 0) ? 0 : 3;
        automatic int nr = (b == 0) ? 3 : 2;
        @(negedge clk);
        acc_en = 1; nvoters = 2'(nv); base = 3'(b); nrows = 3'(nr);
        for (int t = 0; t < TV; t++) for (int r = 0; r < R; r++) begin
          y[t][r] = data_t'($urandom);
          if (t < nv && r < nr) ms[b + r] += longint'(y[t][r]);
        end
      end
      @(negedge clk); acc_en = 0; finish = 1;
      @(negedge clk); finish = 0;
      best = 0;
      for (int i = 0; i < MOUT; i++) begin
        check(longint'(sum[i]) == ms[i], $sformatf("sum %0d", i));
        check(int'(mean[i]) == int'(ms[i] / TOTAL), $sformatf("mean %0d: %0d vs %0d", i, mean[i], ms[i] / TOTAL));
        if (ms[i] > ms[best]) best = i;
      end
      check(int'(cls) == best, $sformatf("class %0d vs %0d", cls, best));
      check(done, "done after finish");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
