// tb_act_buffer: writes an input vector through the host port and hidden
// outputs through the iteration write port (including a partial row block
// and a partial voter count), then reads bytes back from every bank and
// compares them with a model. Entries outside the written rows and voters
// must keep their old value.
module tb_act_buffer;
  import bnn_pkg::*;
  localparam int NBUF = 2, TV = 3, R = 4, MAXM = 10, MAXN = 12;
  localparam int IW = 4, BW = 2, VW = 2;

  logic clk = 0, x_we = 0, we = 0;
  logic [IW-1:0] x_waddr = 0, wbase = 0, wrows = 0, rd_idx = 0;
  logic [BW-1:0] wbank = 1, rd_bank = 0;
  logic [VW-1:0] wvoters = 0, rd_voter = 0;
  data_t x_wdata, wdata [TV][R], rdata;
  data_t xm [MAXN];
  data_t hm [NBUF][TV][MAXM];
  int checks = 0, failures = 0;

  act_buffer #(.NBUF(NBUF), .TV(TV), .R(R), .MAXM(MAXM), .MAXN(MAXN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int bank, input int base, input int rows, input int voters);
    @(negedge clk);
    we = 1; wbank = BW'(bank); wbase = IW'(base); wrows = IW'(rows); wvoters = VW'(voters);
    for (int t = 0; t < TV; t++) for (int r = 0; r < R; r++) begin
      wdata[t][r] = data_t'($urandom);
      if (t < voters && r < rows && base + r < MAXM) hm[bank-1][t][base+r] = wdata[t][r];
    end
    @(negedge clk); we = 0;
  endtask

  task automatic rd(input int bank, input int voter, input int idx);
    data_t e;
    rd_bank = BW'(bank); rd_voter = VW'(voter); rd_idx = IW'(idx);
    @(posedge clk); #1;
    e = (bank == 0) ? xm[idx] : hm[bank-1][voter][idx];
    checks++;
    if (rdata !== e) begin
      failures++;
      if (failures < 10) $display("FAIL bank %0d voter %0d idx %0d: %0d vs %0d", bank, voter, idx, rdata, e);
    end
    @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < MAXN; i++) begin
      @(negedge clk); x_we = 1; x_waddr = IW'(i); x_wdata = data_t'($urandom); xm[i] = x_wdata;
    end
    @(negedge clk); x_we = 0;
    // full blocks for all voters in both banks, then partial overwrites
    for (int bank = 1; bank <= NBUF; bank++) begin
      wr(bank, 0, 4, 3); wr(bank, 4, 4, 3); wr(bank, 8, 2, 3);
    end
    wr(1, 4, 2, 2);
    wr(2, 8, 2, 1);
    for (int i = 0; i < MAXN; i++) rd(0, 0, i);
    for (int bank = 1; bank <= NBUF; bank++)
      for (int t = 0; t < TV; t++)
        for (int i = 0; i < MAXM; i++) rd(bank, t, i);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
