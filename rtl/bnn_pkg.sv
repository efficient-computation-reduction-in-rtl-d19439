// bnn_pkg: types, fixed-point formats and network-shape helpers shared by the
// DM-BNN (feature decomposition and memorization) inference engine.
//
// All stored numbers are 8-bit two's complement fixed point, as in the
// reference hardware. The split between integer and fraction bits is this
// design's own choice: sigma and mu carry W_FRAC fraction bits, inputs,
// memorized features (beta) and activations carry A_FRAC, and the Gaussian
// samples carry H_FRAC. Accumulators are ACC_W bits wide.
//
// The network shape is a three-layer fully connected BNN. Defaults are the
// evaluated configuration: 784-200-200-10 neurons and T = 10, 10, 5 samples
// per layer (500 voters in all). R output rows of a layer are handled per
// iteration (alpha * M = 0.1 * 200 = 20), and up to TV voters of a layer are
// evaluated side by side.
package bnn_pkg;

  localparam int unsigned DW     = 8;
  localparam int unsigned ACC_W  = 32;
  localparam int unsigned W_FRAC = 6;
  localparam int unsigned A_FRAC = 4;
  localparam int unsigned H_FRAC = 4;

  localparam int unsigned NUM_LAYERS = 3;

  typedef logic signed [DW-1:0]    data_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef int unsigned             cfg_t [NUM_LAYERS];

  localparam cfg_t DEF_LAYER_N = '{784, 200, 200};
  localparam cfg_t DEF_LAYER_M = '{200, 200, 10};
  localparam cfg_t DEF_LAYER_T = '{10, 10, 5};
  localparam int unsigned DEF_R  = 20;
  localparam int unsigned DEF_TV = 10;

  // Saturate an accumulator-width value to the 8-bit range.
  function automatic data_t sat8(input acc_t v);
    if (v > acc_t'(127))       return data_t'(127);
    else if (v < -acc_t'(128)) return data_t'(-128);
    else                       return data_t'(v);
  endfunction

  // Number of R-row iterations needed for a layer of m outputs.
  function automatic int unsigned nblk(input int unsigned m, input int unsigned r);
    return (m + r - 1) / r;
  endfunction

  // Words of sigma/mu storage used by all layers (one R-wide word per
  // layer, row block and input column).
  function automatic int unsigned total_words(input cfg_t n, input cfg_t m, input int unsigned r);
    int unsigned s = 0;
    for (int i = 0; i < NUM_LAYERS; i++) s += nblk(m[i], r) * n[i];
    return s;
  endfunction

  function automatic int unsigned max_cfg(input cfg_t c);
    int unsigned s = 0;
    for (int i = 0; i < NUM_LAYERS; i++) if (c[i] > s) s = c[i];
    return s;
  endfunction

  // Number of final voters: product of the per-layer sample counts.
  function automatic int unsigned prod_cfg(input cfg_t c);
    int unsigned s = 1;
    for (int i = 0; i < NUM_LAYERS; i++) s *= c[i];
    return s;
  endfunction

  // splitmix64 finaliser, used to turn a structured seed into a GRNG state.
  function automatic logic [63:0] mix64(input logic [63:0] x);
    logic [63:0] z;
    z = x + 64'h9E37_79B9_7F4A_7C15;
    z = (z ^ (z >> 30)) * 64'hBF58_476D_1CE4_E5B9;
    z = (z ^ (z >> 27)) * 64'h94D0_49BB_1331_11EB;
    z = z ^ (z >> 31);
    return (z == 64'd0) ? 64'd1 : z;
  endfunction

  function automatic logic [63:0] xorshift64(input logic [63:0] x);
    logic [63:0] s;
    s = x ^ (x << 13);
    s = s ^ (s >> 7);
    s = s ^ (s << 17);
    return s;
  endfunction

  // Structured seed of the generator serving voter v, lane r of row block
  // b in layer l. The same (l, b, v, r) always gives the same stream, so
  // one uncertainty matrix per layer and voter is reproduced for every
  // input that layer sees.
  function automatic logic [63:0] grng_seed(input logic [31:0] base, input logic [7:0] l,
                                            input logic [7:0] b, input logic [7:0] v,
                                            input logic [7:0] r);
    return {base, l, b, v, r};
  endfunction

endpackage
