// popcount: pipelined balanced adder tree that counts the ones of N bits.
//
// Level 1 adds neighbouring input bits in pairs, each later level adds
// neighbouring partial sums in pairs, ceil(log2 N) levels in all. A register
// is placed after every PER adder levels and after the last level, which is
// how the network breaks the carry-chain paths of its popcount units.
// Latency is fpgn_pkg::pc_latency(N, PER) cycles; all registers advance
// together when en is high (the enclosing layer's stall), so the unit accepts
// one input vector per enabled cycle. Partial sums are kept OW bits wide.
//
// A balanced adder tree with pipeline registers follows the network's integer
// reduction unit. The register rule (every PER levels and after the last) is
// this design's stand-in for register insertion driven by carry-chain length.
module popcount
  import fpgn_pkg::*;
#(
  parameter int unsigned N   = 16,
  parameter int unsigned PER = 2,
  localparam int unsigned OW = cnt_w(N)
) (
  input  logic          clk,
  input  logic          en,
  input  logic [N-1:0]  x,
  output logic [OW-1:0] y
);
  localparam int unsigned LV = pc_levels(N);

  // Number of nodes at level l (level 0 is the input).
  function automatic int unsigned nodes(input int unsigned l);
    int unsigned w;
    w = N;
    for (int unsigned i = 0; i < l; i++) w = (w + 1) / 2;
    return w;
  endfunction

  for (genvar l = 1; l <= LV; l++) begin : g_lvl
    localparam int unsigned NI  = nodes(l - 1);
    localparam int unsigned NO  = nodes(l);
    localparam bit          REG = ((l % PER) == 0) || (l == LV);
    logic [OW-1:0] a [NI];   // this level's operands
    logic [OW-1:0] sum [NO];
    logic [OW-1:0] q [NO];   // this level's result, registered or not
    if (l == 1) begin : g_in
      always_comb for (int unsigned i = 0; i < NI; i++) a[i] = OW'(x[i]);
    end else begin : g_prev
      always_comb for (int unsigned i = 0; i < NI; i++) a[i] = g_lvl[l-1].q[i];
    end
    always_comb begin
      for (int unsigned i = 0; i < NO; i++)
        sum[i] = a[2*i] + ((2*i + 1 < NI) ? a[2*i+1] : '0);
    end
    if (REG) begin : g_reg
      always_ff @(posedge clk) if (en) q <= sum;
    end else begin : g_comb
      assign q = sum;
    end
  end

  assign y = g_lvl[LV].q[0];
endmodule
