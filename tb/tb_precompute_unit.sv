// tb_precompute_unit: drives random sigma, mu and x columns into a 4-lane
// pre-compute unit and compares beta' (every column) and eta (after the
// last column) with integer reference values; also checks that start
// clears eta and that idle cycles do not accumulate.
module tb_precompute_unit;
  import bnn_pkg::*;
  import bnn_ref_pkg::*;
  localparam int R = 4, N = 40;

  logic clk = 0, rst_n = 0, start = 0, col_valid = 0;
  data_t sigma_col [R], mu_col [R], beta_col [R], x_j;
  acc_t eta [R];
  int checks = 0, failures = 0;

  precompute_unit #(.R(R)) dut (.*);
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
    longint ref_eta [R];
    int sat_seen = 0;
    for (int r = 0; r < R; r++) begin sigma_col[r] = 0; mu_col[r] = 0; end
    x_j = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 3; pass++) begin
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int r = 0; r < R; r++) ref_eta[r] = 0;
      for (int j = 0; j < N; j++) begin
        for (int r = 0; r < R; r++) begin
          sigma_col[r] = data_t'($urandom_range(0, 255));
          mu_col[r]    = data_t'($urandom_range(0, 255));
        end
        x_j = data_t'($urandom_range(0, 255));
        col_valid = (j % 7 != 3);   // some idle cycles
        #1;
        for (int r = 0; r < R; r++) begin
          automatic longint p = longint'(sigma_col[r]) * longint'(x_j);
          automatic int exp_b = ref_sat(ref_asr(p, 6));
          if (exp_b == 127 || exp_b == -128) sat_seen++;
          check(int'(beta_col[r]) == exp_b, $sformatf("beta j=%0d r=%0d: %0d vs %0d", j, r, beta_col[r], exp_b));
          if (col_valid) ref_eta[r] += longint'(mu_col[r]) * longint'(x_j);
        end
        @(negedge clk);
      end
      col_valid = 0;
      @(negedge clk);
      for (int r = 0; r < R; r++)
        check(longint'(eta[r]) == ref_eta[r], $sformatf("eta r=%0d: %0d vs %0d", r, eta[r], ref_eta[r]));
    end
    check(sat_seen > 0, "saturation of beta exercised");
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int r = 0; r < R; r++) check(eta[r] == 0, "start clears eta");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
