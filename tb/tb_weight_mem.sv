// tb_weight_mem: fills a small sigma/mu memory through the host port and
// reads every word back with one cycle of latency, in random order.
module tb_weight_mem;
  import bnn_pkg::*;
  localparam int R = 4, WORDS = 60;

  logic clk = 0, wr_en = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0;
  data_t wr_sigma [R], wr_mu [R], rd_sigma [R], rd_mu [R];
  data_t ms [WORDS][R], mm [WORDS][R];
  int checks = 0, failures = 0;

  weight_mem #(.R(R), .WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(a);
      for (int r = 0; r < R; r++) begin
        wr_sigma[r] = data_t'($urandom); wr_mu[r] = data_t'($urandom);
        ms[a][r] = wr_sigma[r]; mm[a][r] = wr_mu[r];
      end
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 150; k++) begin
      automatic int a = (k < WORDS) ? k : $urandom_range(0, WORDS - 1);
      rd_addr = 6'(a);
      @(posedge clk); #1;
      for (int r = 0; r < R; r++) begin
        checks += 2;
        if (rd_sigma[r] !== ms[a][r]) failures++;
        if (rd_mu[r] !== mm[a][r]) failures++;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
