// vote_unit: the voting node V.
//
// Accumulates the last-layer outputs of every voter and, on finish, forms
// the mean y_bar[i] = sum_k y_k[i] / TOTAL (integer division, truncating
// toward zero). One acc_en cycle adds up to TV voters (voters 0..nvoters-1)
// for rows base .. base+nrows-1 of the output vector. cls is the index of
// the largest sum (the largest mean), the predicted class. clear zeroes the
// sums; mean, cls and done are registered and valid from the cycle after
// finish until the next clear. Averaging follows the paper; the class
// decision by largest mean is this design's addition.
module vote_unit
  import bnn_pkg::*;
#(
  parameter int unsigned MOUT  = 10,
  parameter int unsigned TV    = DEF_TV,
  parameter int unsigned R     = DEF_R,
  parameter int unsigned TOTAL = 500,
  localparam int unsigned VW   = $clog2(TV + 1),
  localparam int unsigned OW   = $clog2(MOUT + 1),
  localparam int unsigned CW   = (MOUT > 1) ? $clog2(MOUT) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          acc_en,
  input  logic [VW-1:0] nvoters,
  input  logic [OW-1:0] base,
  input  logic [OW-1:0] nrows,
  input  data_t         y [TV][R],
  input  logic          finish,
  output acc_t          sum  [MOUT],
  output data_t         mean [MOUT],
  output logic [CW-1:0] cls,
  output logic          done
);

  acc_t          sum_next [MOUT];
  logic [CW-1:0] best;

  // sums after adding the voters presented this cycle, and the current
  // largest sum
  always_comb begin
    for (int i = 0; i < MOUT; i++) begin
      sum_next[i] = sum[i];
      for (int r = 0; r < R; r++)
        if (OW'(r) < nrows && int'(base) + r == i)
          for (int t = 0; t < TV; t++)
            if (VW'(t) < nvoters) sum_next[i] = sum_next[i] + acc_t'(y[t][r]);
    end
    best = '0;
    for (int i = 1; i < MOUT; i++) if (sum[i] > sum[best]) best = CW'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MOUT; i++) begin sum[i] <= '0; mean[i] <= '0; end
      cls  <= '0;
      done <= 1'b0;
    end else if (clear) begin
      for (int i = 0; i < MOUT; i++) sum[i] <= '0;
      done <= 1'b0;
    end else if (acc_en) begin
      for (int i = 0; i < MOUT; i++) sum[i] <= sum_next[i];
    end else if (finish) begin
      for (int i = 0; i < MOUT; i++) mean[i] <= sat8(sum[i] / acc_t'(TOTAL));
      cls  <= best;
      done <= 1'b1;
    end
  end

endmodule
