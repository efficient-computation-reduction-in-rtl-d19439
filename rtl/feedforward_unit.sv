// feedforward_unit: the feed-forward stage F of the DM strategy.
//
// TV voters x R rows of multiply-accumulate lanes. For each input column j
// presented with col_valid, lane (t, r) adds h[t][r] * beta_col[r], so all
// voters of an iteration share the same memorized beta' column, as in the
// memory-friendly scheme. After the last column the lane holds
// z[t][r] = <H_t, beta'>_L for row r, and the combinational output is
//   y[t][r] = sat8( act( (z << (W_FRAC-H_FRAC) + eta[r]) >>> W_FRAC ) )
// i.e. z + eta aligned to W_FRAC+A_FRAC fraction bits, brought back to the
// A_FRAC activation format. act() is ReLU when relu is high (hidden layers)
// and the identity otherwise. start clears all lanes synchronously; y is
// valid in the cycle after the last col_valid. The paper gives the
// equations z_k = <H_k, beta>_L and y_k = z_k + eta; the activation
// function, rounding and lane organisation are this design's choices.
module feedforward_unit
  import bnn_pkg::*;
#(
  parameter int unsigned TV = DEF_TV,
  parameter int unsigned R  = DEF_R
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  col_valid,
  input  data_t h        [TV][R],
  input  data_t beta_col [R],
  input  acc_t  eta      [R],
  input  logic  relu,
  output data_t y        [TV][R]
);

  acc_t z [TV][R];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < TV; t++) for (int r = 0; r < R; r++) z[t][r] <= '0;
    end else if (start) begin
      for (int t = 0; t < TV; t++) for (int r = 0; r < R; r++) z[t][r] <= '0;
    end else if (col_valid) begin
      for (int t = 0; t < TV; t++)
        for (int r = 0; r < R; r++)
          z[t][r] <= z[t][r] + acc_t'(h[t][r]) * acc_t'(beta_col[r]);
    end
  end

  always_comb begin
    for (int t = 0; t < TV; t++) begin
      for (int r = 0; r < R; r++) begin
        acc_t s, q;
        s = (z[t][r] <<< (W_FRAC - H_FRAC)) + eta[r];
        q = s >>> W_FRAC;
        if (relu && q < 0) q = '0;
        y[t][r] = sat8(q);
      end
    end
  end

endmodule
