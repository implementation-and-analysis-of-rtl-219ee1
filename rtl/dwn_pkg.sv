// dwn_pkg: sizes and default model content shared by the DWN accelerator.
//
// The accelerator is a differentiable weightless neural network (DWN) for the
// jet substructure classification task: 16 input features, each turned into a
// 200-bit thermometer code by a bank of comparators, a single layer of 2400
// six-input LUTs whose inputs are wired to chosen thermometer bits, and a
// popcount + argmax classifier over 5 classes. The sizes below are those of
// the large model (lg-2400) with 9-bit inputs, the largest configuration the
// accelerator is evaluated in.
//
// A trained model consists of three tables: the thresholds of every encoder,
// the thermometer bit feeding every LUT input (the "learnable mapping") and the
// truth table of every LUT. Training produces them; they are not part of the
// hardware description. The default_* functions here fill the tables with a
// deterministic stand-in model so that the RTL elaborates and simulates on its
// own. To build a trained network, pass the trained tables as parameters of
// dwn_top instead. The stand-in thresholds are sorted and non-uniformly spaced
// like distributive (percentile) thresholds; the mapping and LUT contents are
// pseudo-random hashes of the LUT number.
package dwn_pkg;

  // Model size (lg-2400, 9-bit input, JSC dataset)
  parameter int unsigned NUM_FEATURES = 16;    // JSC input features
  parameter int unsigned IN_WIDTH     = 9;     // signed fixed point: 1 sign bit + 8 fraction bits
  parameter int unsigned NUM_THRESH   = 200;   // thermometer bits per feature
  parameter int unsigned NUM_LUTS     = 2400;  // LUTs in the single LUT layer
  parameter int unsigned LUT_INPUTS   = 6;     // inputs per LUT
  parameter int unsigned NUM_CLASSES  = 5;     // jet classes

  // 32-bit integer mixing function (multiply / xor-shift), used only to
  // produce the stand-in model.
  function automatic int unsigned hash32(int unsigned x);
    int unsigned h;
    h = x * 32'h9E3779B1;
    h = h ^ (h >> 15);
    h = h * 32'h85EBCA77;
    h = h ^ (h >> 13);
    h = h * 32'hC2B2AE3D;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Stand-in threshold t (0 .. nthr-1) of feature f for a width-bit signed
  // input. With R = 2^(width-1), s = 2(t+1) - (nthr+1) and m = nthr+1:
  //   lin  = s*R/m           (uniform spacing over [-R, R))
  //   quad = s*|s|*R/m^2     (dense near zero, sparse at the ends)
  //   th   = (a*quad + (4-a)*lin) / 4, a = f mod 5
  // Every term is non-decreasing in t, so the thresholds are sorted.
  function automatic int default_threshold(int unsigned f, int unsigned t,
                                           int unsigned nthr, int unsigned width);
    longint r, s, m, lin, quad, a;
    int unsigned fsel;
    r    = longint'(1) << (width - 1);
    s    = 2 * (longint'(t) + 1) - (longint'(nthr) + 1);
    m    = longint'(nthr) + 1;
    lin  = (s * r) / m;
    quad = (s * (s < 0 ? -s : s) * r) / (m * m);
    fsel = f % 5;
    a    = longint'(fsel);
    return int'((a * quad + (4 - a) * lin) / 4);
  endfunction

  // Stand-in mapping: thermometer bit (0 .. nenc-1) feeding input i of LUT l.
  function automatic int unsigned default_map(int unsigned l, int unsigned i,
                                              int unsigned nenc);
    return hash32(l * 64 + i + 32'h0000_1234) % nenc;
  endfunction

  // Stand-in truth table of LUT l (the low 2^k bits are used).
  function automatic logic [63:0] default_lut_init(int unsigned l);
    return {hash32(2 * l + 32'h5000), hash32(2 * l + 32'h5001)};
  endfunction

endpackage
