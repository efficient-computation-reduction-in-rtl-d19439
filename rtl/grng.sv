// grng: standard-Gaussian random number generator (the sampling node S).
//
// Central-limit method: the sample is the sum of CLT_TERMS 4-bit uniform
// numbers taken from a 64-bit xorshift state, minus its mean. With the
// default 12 terms the result approximates N(0,1) scaled by 2^H_FRAC
// (16 LSB per standard deviation) and lies in [-90, 90]. The paper names
// the central-limit transformation as the common method but does not design
// its generator; the xorshift source, the term count and the seed mixer
// are this design's choices.
//
// Interface: seed_load copies mix64(seed) into the state on the next clock
// edge; advance steps the state. h is a combinational function of the
// current state, so a new sample is available one cycle after seed_load
// or advance. seed_load has priority over advance.
module grng
  import bnn_pkg::*;
#(
  parameter int unsigned CLT_TERMS = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_load,
  input  logic [63:0] seed,
  input  logic        advance,
  output data_t       h
);

  localparam int unsigned OFFSET = CLT_TERMS * 15 / 2;

  logic [63:0] state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         state <= 64'd1;
    else if (seed_load) state <= mix64(seed);
    else if (advance)   state <= xorshift64(state);
  end

  always_comb begin
    int unsigned sum;
    sum = 0;
    for (int i = 0; i < CLT_TERMS; i++) sum += int'(state[4*i +: 4]);
    h = data_t'(int'(sum) - int'(OFFSET));
  end

  initial assert (CLT_TERMS <= 16 && CLT_TERMS % 2 == 0)
    else $error("grng: CLT_TERMS must be even and at most 16");

endmodule
