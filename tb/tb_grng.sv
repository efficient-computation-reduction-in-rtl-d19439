// tb_grng: checks the central-limit Gaussian generator against an
// independent integer model of the same stream (bit exact), checks that a
// reseed reproduces the stream and that the state holds without advance,
// and checks the sample statistics (mean near 0, standard deviation near
// 16 LSB = 1.0 in the 4-fraction-bit format, range within +-90).
module tb_grng;
  import bnn_pkg::*;
  import bnn_ref_pkg::*;

  logic clk = 0, rst_n = 0, seed_load = 0, advance = 0;
  logic [63:0] seed;
  data_t h;
  int checks = 0, failures = 0;

  grng dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    longint unsigned st;
    int first [16];
    real sum, sq, mean, sd;
    int mn, mx;
    seed = 64'h1234_5678_9ABC_DEF0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); seed_load = 1;
    @(negedge clk); seed_load = 0;
    st = ref_mix(seed);
    // bit-exact stream
    for (int i = 0; i < 200; i++) begin
      check(int'(h) == ref_sample(st, 12), $sformatf("sample %0d: %0d vs %0d", i, h, ref_sample(st, 12)));
      if (i < 16) first[i] = int'(h);
      advance = 1; @(negedge clk); advance = 0;
      st = ref_step(st);
    end
    // hold without advance
    begin
      data_t keep;
      keep = h;
      repeat (3) @(negedge clk);
      check(h == keep, "holds without advance");
    end
    // reseed reproduces the first samples
    seed_load = 1; @(negedge clk); seed_load = 0;
    for (int i = 0; i < 16; i++) begin
      check(int'(h) == first[i], $sformatf("reseed sample %0d", i));
      advance = 1; @(negedge clk); advance = 0;
    end
    // different seed gives a different stream
    seed = 64'h1234_5678_9ABC_DEF1;
    seed_load = 1; @(negedge clk); seed_load = 0;
    begin
      int same;
      same = 0;
      for (int i = 0; i < 16; i++) begin
        if (int'(h) == first[i]) same++;
        advance = 1; @(negedge clk); advance = 0;
      end
      check(same < 8, "neighbouring seed gives a different stream");
    end
    // statistics
    sum = 0; sq = 0; mn = 1000; mx = -1000;
    advance = 1;
    for (int i = 0; i < 8000; i++) begin
      @(negedge clk);
      sum += h; sq += real'(h) * real'(h);
      if (h < mn) mn = h;
      if (h > mx) mx = h;
    end
    advance = 0;
    mean = sum / 8000.0;
    sd = $sqrt(sq / 8000.0 - mean * mean);
    $display("grng: mean %f sd %f min %0d max %0d", mean, sd, mn, mx);
    check(mean > -1.0 && mean < 1.0, "mean near zero");
    check(sd > 14.5 && sd < 17.5, "standard deviation near 16 LSB");
    check(mn >= -90 && mx <= 90, "range");
    check(mn < -40 && mx > 40, "tails present");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
