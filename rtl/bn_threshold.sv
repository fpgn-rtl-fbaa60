// bn_threshold: batch normalisation and binarisation folded into one integer
// comparison per channel.
//
// Training places a BN layer and a sign binariser after each integer sum.
// At inference both fold into y = (x >= T), with
// T = round(E - beta*sqrt(var+eps)/lambda) per channel (for positive lambda),
// so the whole step is a comparator on the integer sum. The thresholds are
// trained values; here T(c) = fpgn_pkg::bn_thresh(SEED, c, MAXV), a stand-in
// centred on half the largest sum MAXV. Combinational.
//
// x holds channel c at c*XW +: XW (unsigned); y[c] is its binary activation.
//
// The fusion of batch-norm and binarisation into one integer comparison follows
// the network. The comparison direction (>=) and the stand-in thresholds are
// this design's own.
module bn_threshold
  import fpgn_pkg::*;
#(
  parameter int unsigned C    = 8,
  parameter int unsigned XW   = 8,
  parameter int unsigned MAXV = 100,
  parameter logic [31:0] SEED = 32'd7
) (
  input  logic [C*XW-1:0] x,
  output logic [C-1:0]    y
);
  always_comb begin
    for (int unsigned c = 0; c < C; c++)
      y[c] = 32'(x[c*XW +: XW]) >= bn_thresh(SEED, c, MAXV);
  end
endmodule
