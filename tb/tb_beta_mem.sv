// tb_beta_mem: writes random columns to a small beta memory and reads them
// back, checking the one-cycle read latency and that a write during a read
// of another address does not disturb it.
module tb_beta_mem;
  import bnn_pkg::*;
  localparam int R = 3, DEPTH = 50;

  logic clk = 0, we = 0;
  logic [5:0] waddr = 0, raddr = 0;
  data_t wdata [R], rdata [R];
  data_t model [DEPTH][R];
  int checks = 0, failures = 0;

  beta_mem #(.R(R), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a);
      for (int r = 0; r < R; r++) begin wdata[r] = data_t'($urandom); model[a][r] = wdata[r]; end
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 200; k++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      automatic int wa = $urandom_range(0, DEPTH - 1);
      raddr = 6'(a);
      we = (wa != a); waddr = 6'(wa);
      for (int r = 0; r < R; r++) wdata[r] = data_t'($urandom);
      @(posedge clk);
      if (we) for (int r = 0; r < R; r++) model[wa][r] = wdata[r];
      #1;
      for (int r = 0; r < R; r++) begin
        checks++;
        if (rdata[r] !== model[a][r]) begin
          failures++;
          if (failures < 10) $display("FAIL addr %0d lane %0d", a, r);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
