// fpgn_ref_pkg: reference model of the LUT-native network for the testbenches.
//
// Builds the locality-aware wiring by writing out the padded input sequence
// explicitly (unique bits in order, the last LUT's vacant pins repeating its
// own bits, the padded sequence replicated over the remaining LUTs), then
// evaluates LUTs, popcounts and thresholds on plain dynamic arrays. Only the
// stand-in weight generators (lut_init, bn_thresh) are shared with the RTL.
//
// The reference follows the network's definitions directly and is written
// independently of the RTL's index arithmetic.
package fpgn_ref_pkg;
  typedef bit bits_t[];
  typedef int ints_t[];

  // pins[n*k+p] = input bit feeding pin p of LUT n.
  function automatic ints_t ref_pins(int m, int k, int n_luts);
    ints_t seq, pins;
    int nb, last, avail;
    nb    = (m + k - 1) / k;
    seq   = new[nb * k];
    last  = (nb - 1) * k;
    avail = m - last;
    for (int t = 0; t < m; t++) seq[t] = t;
    for (int t = m; t < nb * k; t++) seq[t] = last + (t - last) % avail;
    pins = new[n_luts * k];
    for (int t = 0; t < n_luts * k; t++) pins[t] = (t < nb * k) ? seq[t] : seq[(t - nb * k) % (nb * k)];
    return pins;
  endfunction

  function automatic bits_t ref_lut_layer(bits_t x, int n_luts, bit [31:0] seed, int k);
    ints_t pins;
    bits_t y;
    pins = ref_pins(x.size(), k, n_luts);
    y = new[n_luts];
    for (int n = 0; n < n_luts; n++) begin
      bit [63:0] cfg;
      int a;
      cfg = fpgn_pkg::lut_init(seed, n);
      a = 0;
      for (int p = 0; p < k; p++) a += int'(x[pins[n*k+p]]) << p;
      y[n] = cfg[a];
    end
    return y;
  endfunction

  function automatic int ref_popcount(bits_t x);
    int s;
    s = 0;
    foreach (x[i]) s += int'(x[i]);
    return s;
  endfunction

  // LUT-tree: levels seeded seed + l*0x1000, l = 1, 2, ...
  function automatic bit ref_tree(bits_t x, bit [31:0] seed, int k);
    bits_t v;
    int l;
    v = x;
    l = 0;
    do begin
      l++;
      v = ref_lut_layer(v, (v.size() + k - 1) / k, seed + 32'(l) * 32'h1000, k);
    end while (v.size() > 1);
    return v[0];
  endfunction
endpackage
