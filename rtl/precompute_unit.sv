// precompute_unit: the pre-compute stage P of the DM strategy.
//
// For one iteration of R output rows it forms, column by column,
//   beta'[r][j] = sigma[r][j] * x[j]          (element-wise, memorized)
//   eta[r]     += mu[r][j]    * x[j]          (matrix-vector product)
// One input column (R sigma values, R mu values and the shared x[j]) is
// taken per cycle when col_valid is high. beta_col is combinational: the
// product requantized from W_FRAC+A_FRAC to A_FRAC fraction bits with
// saturation, ready to be written into the beta memory in the same cycle.
// eta keeps full accumulator precision (W_FRAC+A_FRAC fraction bits);
// start clears it synchronously. The equations are those of the paper;
// lane count, rounding (truncation) and widths are this design's.
module precompute_unit
  import bnn_pkg::*;
#(
  parameter int unsigned R = DEF_R
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  col_valid,
  input  data_t sigma_col [R],
  input  data_t mu_col    [R],
  input  data_t x_j,
  output data_t beta_col  [R],
  output acc_t  eta       [R]
);

  always_comb begin
    for (int r = 0; r < R; r++) begin
      acc_t p;
      p = acc_t'(sigma_col[r]) * acc_t'(x_j);
      beta_col[r] = sat8(p >>> W_FRAC);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < R; r++) eta[r] <= '0;
    end else if (start) begin
      for (int r = 0; r < R; r++) eta[r] <= '0;
    end else if (col_valid) begin
      for (int r = 0; r < R; r++) eta[r] <= eta[r] + acc_t'(mu_col[r]) * acc_t'(x_j);
    end
  end

endmodule
