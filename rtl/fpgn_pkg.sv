// fpgn_pkg: constants and constant functions shared by the LUT-native network.
//
// A k-LUT neuron selects one of its 2^k configuration bits with the address
// formed by its k input bits, input i weighting 2^i (the LUT equation of the
// network's formulation). The configuration bits are the trained weights of
// the network; they are not part of this RTL, so lut_init() produces a fixed
// pseudo-random stand-in from a layer seed and the LUT's index (a splitmix64
// style hash). Replace lut_init() and bn_thresh() with tables exported from
// training to deploy a trained network; nothing else changes.
//
// pad_src() is the locality-aware padding map that wires an M-bit input vector
// in order onto N k-input LUTs:
//   N_base = ceil(M/k) LUTs take the bits in order, k per LUT; the last of them,
//   if it has a < k bits, repeats those a bits cyclically on its vacant pins
//   (giving M_hat = N_base*k pins); the remaining N - N_base LUTs take the
//   M_hat-long padded sequence again from the start, in order and cyclically.
//
// Follows the network's definitions: the k-LUT equation, the two-stage padding
// rule and the ceil(log_k N) tree depth. Own choices: the hash stand-ins for trained
// values, and the register rule of the popcount latency.
package fpgn_pkg;

  // LUT input count of the target fabric (6-LUTs).
  localparam int unsigned LUT_K = 6;

  // splitmix64 finaliser.
  function automatic logic [63:0] mix64(input logic [63:0] z_in);
    logic [63:0] z;
    z = z_in;
    z = (z ^ (z >> 30)) * 64'hBF58_476D_1CE4_E5B9;
    z = (z ^ (z >> 27)) * 64'h94D0_49BB_1331_11EB;
    return z ^ (z >> 31);
  endfunction

  // Stand-in configuration of LUT number idx in the layer identified by seed.
  function automatic logic [63:0] lut_init(input logic [31:0] seed, input logic [31:0] idx);
    return mix64({seed, idx} + 64'h9E37_79B9_7F4A_7C15);
  endfunction

  // Output of a k-LUT: configuration bit addressed by the inputs (input i = 2^i).
  function automatic logic lut_eval(input logic [63:0] cfg, input logic [5:0] x);
    return cfg[x];
  endfunction

  // Locality-aware padding: source bit of pin p of LUT n, for an M-bit input
  // spread over k-input LUTs.
  function automatic int unsigned pad_src(input int unsigned m, input int unsigned k,
                                          input int unsigned n, input int unsigned p);
    int unsigned nbase, mhat, t, base, avail;
    nbase = (m + k - 1) / k;
    mhat  = nbase * k;
    if (n < nbase) t = n * k + p;
    else           t = ((n - nbase) * k + p) % mhat;
    base  = (t / k) * k;
    avail = (m - base < k) ? (m - base) : k;
    return base + ((t - base) % avail);
  endfunction

  // Number of LUTs of a LUT-tree level fed by n bits.
  function automatic int unsigned ceil_div(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Levels of a LUT-tree reducing n bits to one: ceil(log_k n), at least 1.
  function automatic int unsigned tree_levels(input int unsigned n, input int unsigned k);
    int unsigned w, l;
    w = n;
    l = 0;
    do begin
      w = (w + k - 1) / k;
      l++;
    end while (w > 1);
    return l;
  endfunction

  // Bits needed to hold the values 0..v.
  function automatic int unsigned cnt_w(input int unsigned v);
    return (v < 1) ? 1 : $clog2(v + 1);
  endfunction

  // Register stages of a popcount of n bits with a register after every
  // `per` adder levels and after the last level.
  function automatic int unsigned pc_levels(input int unsigned n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction
  function automatic int unsigned pc_latency(input int unsigned n, input int unsigned per);
    return (pc_levels(n) + per - 1) / per;
  endfunction

  // Stand-in for the fused batch-norm threshold round(E - beta*sqrt(var+eps)/lambda)
  // of channel ch: centred on half the largest reachable sum, spread over -4..+3.
  function automatic int unsigned bn_thresh(input logic [31:0] seed, input int unsigned ch,
                                            input int unsigned maxv);
    logic [2:0]  h;
    int unsigned c;
    h = 3'(mix64({seed ^ 32'h5bd1_e995, ch}));
    c = maxv / 2;
    return (c + 3 >= 32'(h)) ? c + 3 - 32'(h) : 0;
  endfunction

endpackage
