// lut_tree: binary reduction of N_I bits to a single bit by cascaded LUT-vectors.
//
// Level 1 is a LUT-vector of ceil(N_I/k) LUTs over the input, level 2 a
// LUT-vector of ceil(level-1 width / k) LUTs over level 1's outputs, and so on
// until one LUT remains: ceil(log_k N_I) levels, the decreasing pyramid of the
// network's binary reduction unit. Every level is wired in order with
// locality-aware padding. Level l uses seed SEED + l*0x1000.
// Combinational (the aggregation trees are two levels deep at their default
// size, well within one clock period); the enclosing layer registers the bit.
//
// The pyramid of ceil(log_k N) LUT-vectors follows the network's binary
// reduction unit. Leaving the tree unregistered is this design's choice: the
// trees used here are at most two LUTs deep.
module lut_tree
  import fpgn_pkg::*;
#(
  parameter int unsigned N_I  = 8,
  parameter int unsigned K    = LUT_K,
  parameter logic [31:0] SEED = 32'd1
) (
  input  logic [N_I-1:0] x,
  output logic           y
);
  localparam int unsigned LV = tree_levels(N_I, K);

  // Width feeding level l (l = 0 is the tree input).
  function automatic int unsigned lvl_w(input int unsigned l);
    int unsigned w;
    w = N_I;
    for (int unsigned i = 0; i < l; i++) w = ceil_div(w, K);
    return w;
  endfunction

  for (genvar l = 1; l <= LV; l++) begin : g_lvl
    localparam int unsigned WI = lvl_w(l - 1);
    localparam int unsigned WO = lvl_w(l);
    logic [WI-1:0] a;
    logic [WO-1:0] o;
    if (l == 1) begin : g_in
      assign a = x;
    end else begin : g_prev
      assign a = g_lvl[l-1].o;
    end
    lut_vector #(.M(WI), .N(WO), .K(K), .SEED(SEED + 32'(l) * 32'h1000)) u_vec (
      .x(a), .y(o)
    );
  end

  assign y = g_lvl[LV].o[0];
endmodule
