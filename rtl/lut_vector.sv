// lut_vector: N independent k-input LUTs fed from an M-bit input vector.
//
// This is the parallel processing unit of the network: each output bit is
// produced by its own k-LUT. The LUTs are wired to the input in order with
// locality-aware padding (fpgn_pkg::pad_src): LUT n takes bits n*k..n*k+k-1,
// the last partly filled LUT repeats its own bits, and LUTs beyond ceil(M/k)
// take the padded sequence again from the start. M may not exceed k*N.
// The configuration of LUT n is fpgn_pkg::lut_init(SEED, n), a stand-in for
// trained weights. Combinational: y follows x in the same cycle; the layers
// around it place the pipeline registers.
//
// The in-order wiring and the two-stage locality-aware padding follow the
// network's definition exactly. The stand-in LUT contents are this design's own.
module lut_vector
  import fpgn_pkg::*;
#(
  parameter int unsigned M    = 9,
  parameter int unsigned N    = 4,
  parameter int unsigned K    = LUT_K,
  parameter logic [31:0] SEED = 32'd1
) (
  input  logic [M-1:0] x,
  output logic [N-1:0] y
);
  initial assert (M <= K * N) else $error("lut_vector: input wider than k*N");
  initial assert (K >= 1 && K <= 6) else $error("lut_vector: K must be 1..6");

  always_comb begin
    for (int unsigned n = 0; n < N; n++) begin
      logic [5:0]  a;
      logic [63:0] cfg;
      a = '0;
      for (int unsigned p = 0; p < K; p++) a[p] = x[pad_src(M, K, n, p)];
      cfg  = lut_init(SEED, n);
      y[n] = lut_eval(cfg, a);
    end
  end
endmodule
