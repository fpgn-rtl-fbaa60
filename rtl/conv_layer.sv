// conv_layer: LUT-native convolution (LUT-Conv) for WU window positions.
//
// For every output channel the K x K x CIN input window, flattened in order
// (row, column, then channel fastest), feeds a LUT-vector of
// NL = ceil(K*K*CIN/k) LUTs wired with locality-aware padding. Each LUT is a
// k-to-1 neuron, so the popcount that follows counts only NL bits instead of
// K*K*CIN: the adder tree is log2(NL) deep rather than log2(K*K*CIN).
// The popcount gives the channel's integer sum. In the second layer of a
// residual block (RES = 1) the integer sum of the block's first layer is added
// here, before normalisation, so the identity path stays in small integers.
// Batch-norm and binarisation are a single comparison against a per-channel
// threshold (bn_threshold). Outputs are the binary activations and, for the
// identity path, the integer sums. The WU positions are independent copies of
// the kernel (column unrolling); all copies and channels share one pipeline.
//
// Pipeline: stage 1 registers the LUT outputs, then the popcount's registers
// (one after every PC_PER adder levels and after the last), then one stage
// that adds the residual and compares. Latency LAT = pc_latency(NL, PC_PER) + 2
// cycles; one window per cycle. An item moves into the output register when
// that register is empty or being read and, for RES = 1, its residual word is
// present (the word is taken in the same cycle). The stages before it advance
// together whenever their last stage is empty or its item moves on; in_ready
// is that advance condition.
//
// Interface: in_win is the line buffer's window vector (window u at
// u*K*K*CIN); out_bits holds position u channel c at u*COUT+c; out_int holds
// the integer sum of position u channel c at (u*COUT+c)*SW; res_data has the
// same layout with RW-bit words. With RES = 0 (first layer of a block) the
// residual inputs are ignored and res_ready is constant 0. LUT configurations
// and thresholds are stand-ins derived from SEED (see fpgn_pkg).
//
// Follows the LUT-Conv definition: channel-parallel LUT-vectors, popcount,
// identity addition on the integer sums before the fused batch-norm threshold,
// and kernel copies for column unrolling. Register placement, handshake and the
// stand-in weights are this design's own.
module conv_layer
  import fpgn_pkg::*;
#(
  parameter int unsigned CIN     = 8,
  parameter int unsigned COUT    = 8,
  parameter int unsigned K       = 3,
  parameter int unsigned WU      = 1,
  parameter int unsigned LK      = LUT_K,
  parameter int unsigned PC_PER  = 2,
  parameter bit          RES     = 1'b0,
  parameter int unsigned RW      = 1,
  parameter int unsigned RES_MAX = 0,
  parameter logic [31:0] SEED    = 32'h0002_0000,
  localparam int unsigned B   = K * K * CIN,
  localparam int unsigned NL  = ceil_div(B, LK),
  localparam int unsigned PW_ = cnt_w(NL),
  localparam int unsigned SW  = RES ? ((PW_ > RW ? PW_ : RW) + 1) : PW_,
  localparam int unsigned MAXV = NL + (RES ? RES_MAX : 0)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [WU*B-1:0]       in_win,
  input  logic                  res_valid,
  output logic                  res_ready,
  input  logic [WU*COUT*RW-1:0] res_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [WU*COUT-1:0]    out_bits,
  output logic [WU*COUT*SW-1:0] out_int
);
  localparam int unsigned PL  = pc_latency(NL, PC_PER);
  localparam int unsigned LAT = PL + 2;

  logic [LAT-1:0] v;        // valid of each stage
  logic           out_free; // output register can take an item
  logic           move;     // item leaves stage LAT-2 for the output stage
  logic           adv;      // stages 0..LAT-2 advance

  assign out_free  = !v[LAT-1] || out_ready;
  assign move      = v[LAT-2] && out_free && (!RES || res_valid);
  assign adv       = !v[LAT-2] || move;
  assign in_ready  = adv;
  assign res_ready = RES && move;
  assign out_valid = v[LAT-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else begin
      if (adv)      v[LAT-2:0] <= {v[LAT-3:0], in_valid};   // LAT >= 3 always
      if (out_free) v[LAT-1]   <= move;
    end
  end

  logic [WU*COUT*SW-1:0] sum;
  logic [WU*COUT-1:0]    bits;

  for (genvar u = 0; u < WU; u++) begin : g_pos
    for (genvar c = 0; c < COUT; c++) begin : g_ch
      logic [NL-1:0]  l_d, l_q;
      logic [PW_-1:0] cnt;
      lut_vector #(.M(B), .N(NL), .K(LK), .SEED(SEED + 32'(c))) u_lv (
        .x(in_win[u*B +: B]), .y(l_d)
      );
      always_ff @(posedge clk) if (adv) l_q <= l_d;
      popcount #(.N(NL), .PER(PC_PER)) u_pc (.clk(clk), .en(adv), .x(l_q), .y(cnt));
      if (RES) begin : g_res
        assign sum[(u*COUT+c)*SW +: SW] = SW'(cnt) + SW'(res_data[(u*COUT+c)*RW +: RW]);
      end else begin : g_nores
        assign sum[(u*COUT+c)*SW +: SW] = SW'(cnt);
      end
    end
    bn_threshold #(.C(COUT), .XW(SW), .MAXV(MAXV), .SEED(SEED)) u_thr (
      .x(sum[u*COUT*SW +: COUT*SW]), .y(bits[u*COUT +: COUT])
    );
  end

  if (!RES) begin : g_no_res_in
    // no identity input in the first layer of a block
    logic unused_res;
    assign unused_res = ^{res_valid, res_data};
  end

  always_ff @(posedge clk) begin
    if (move) begin
      out_bits <= bits;
      out_int  <= sum;
    end
  end

endmodule
