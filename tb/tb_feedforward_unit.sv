// tb_feedforward_unit: random uncertainty samples, beta' columns and eta
// into a 3-voter x 4-lane feed-forward unit; compares every output
// y = act((z << 2 + eta) >>> 6) with an integer reference, with ReLU on
// and off, and checks that the output is ready in the cycle after the
// last column.
module tb_feedforward_unit;
  import bnn_pkg::*;
  import bnn_ref_pkg::*;
  localparam int TV = 3, R = 4, N = 25;

  logic clk = 0, rst_n = 0, start = 0, col_valid = 0, relu = 0;
  data_t h [TV][R], beta_col [R], y [TV][R];
  acc_t eta [R];
  int checks = 0, failures = 0;
  int clamped = 0, saturated = 0;

  feedforward_unit #(.TV(TV), .R(R)) dut (.*);
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
    longint z [TV][R];
    for (int t = 0; t < TV; t++) for (int r = 0; r < R; r++) h[t][r] = 0;
    for (int r = 0; r < R; r++) begin beta_col[r] = 0; eta[r] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 8; pass++) begin
      automatic int hr = (pass < 4) ? 20 : 90;
      relu = pass[0];
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int t = 0; t < TV; t++) for (int r = 0; r < R; r++) z[t][r] = 0;
      for (int r = 0; r < R; r++) eta[r] = acc_t'($urandom_range(0, 60000)) - 30000;
      for (int j = 0; j < N; j++) begin
        col_valid = 1;
        for (int r = 0; r < R; r++) beta_col[r] = data_t'($urandom_range(0, 255));
        for (int t = 0; t < TV; t++) for (int r = 0; r < R; r++) begin
          h[t][r] = data_t'($urandom_range(0, 2 * hr) - hr);
          z[t][r] += longint'(h[t][r]) * longint'(beta_col[r]);
        end
        @(negedge clk);
      end
      col_valid = 0;
      for (int t = 0; t < TV; t++) for (int r = 0; r < R; r++) h[t][r] = data_t'($urandom);
      #1;
      for (int t = 0; t < TV; t++) for (int r = 0; r < R; r++) begin
        automatic longint q = ref_asr((z[t][r] << 2) + longint'(eta[r]), 6);
        int e;
        if (relu && q < 0) begin q = 0; clamped++; end
        e = ref_sat(q);
        if (e != q) saturated++;
        check(int'(y[t][r]) == e, $sformatf("pass %0d y[%0d][%0d]: %0d vs %0d", pass, t, r, y[t][r], e));
      end
    end
    check(clamped > 0, "ReLU clamp exercised");
    check(saturated > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
