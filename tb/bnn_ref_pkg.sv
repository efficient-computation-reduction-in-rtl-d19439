// bnn_ref_pkg: reference arithmetic for the DM-BNN testbenches.
//
// Written separately from the RTL: plain integer models of the Gaussian
// sample stream (splitmix64 seeding, xorshift64 stepping, central-limit
// nibble sum) and of the 8-bit fixed-point rules (truncating arithmetic
// shifts, saturation to [-128, 127]).
package bnn_ref_pkg;

  function automatic longint unsigned ref_mix(input longint unsigned x);
    longint unsigned z;
    z = x + 64'h9E3779B97F4A7C15;
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    z = z ^ (z >> 31);
    if (z == 0) z = 1;
    return z;
  endfunction

  function automatic longint unsigned ref_step(input longint unsigned x);
    x = x ^ (x << 13);
    x = x ^ (x >> 7);
    x = x ^ (x << 17);
    return x;
  endfunction

  function automatic int ref_sample(input longint unsigned s, input int terms);
    int acc = 0;
    for (int i = 0; i < terms; i++) acc += int'((s >> (4 * i)) & 64'hF);
    return acc - terms * 15 / 2;
  endfunction

  function automatic longint unsigned ref_seed(input int unsigned base, input int l,
                                               input int b, input int v, input int r);
    return (longint'(base) << 32) | (longint'(l & 255) << 24) | (longint'(b & 255) << 16)
         | (longint'(v & 255) << 8) | longint'(r & 255);
  endfunction

  function automatic int ref_sat(input longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  // arithmetic shift right of a signed value (floor division by 2^s)
  function automatic longint ref_asr(input longint v, input int s);
    return v >>> s;
  endfunction

endpackage
