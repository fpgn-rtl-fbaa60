// fpgn_top: streaming LUT-native CNN accelerator, six-convolution variant
// (FPGN-6) at width multiplier 8 (the "G" size) for 32x32 RGB images.
//
// Dataflow, one image at a time through a chain of layers that all work
// concurrently:
//   1. agg_layer: every 24-bit pixel (3 colours x 8 bits) is reduced by
//      LUT-trees to NA = (16/3)*8 = 40 binary features per colour, 120 per pixel.
//   2. Six LUT-Conv layers, 3x3 kernels, each fed by a stationary-window
//      circular line buffer. Layers 1, 3, 5 have stride 2 and start a residual
//      block; layers 2, 4, 6 have stride 1 and add the integer sums of the
//      block's first layer (passed through a res_fifo) before their threshold.
//      Output channels are 16*8, 32*8 and 64*8 for the three blocks; the map
//      shrinks 32 -> 16 -> 16 -> 8 -> 8 -> 4 -> 4.
//   3. flatten_buffer gathers the 4x4x512 map into an 8192-bit vector.
//   4. Two fc_layers of 2000 LUTs each.
//   5. group_sum: ten popcounts over 200-bit groups give the class scores.
//
// Everything is LUTs, adders, comparators and registers: no multiplier and
// no block memory is needed, and all trained values live in LUT contents and
// thresholds (stand-ins here, see fpgn_pkg).
//
// Parameters: image size and pixel format, the width multiplier WK, the
// channel bases M_AGG / M_C1..M_C3, FC sizes, the number of classes, the
// aggregation unroll AW (pixels per input beat) and per-layer column unroll
// factors WU1..WU6 (window positions per cycle), and PC_PER, the number of
// adder levels between popcount pipeline registers. Unroll factors are
// chosen per deployment; the defaults use no unrolling (one window per cycle).
//
// Interface: in_valid/in_ready/in_pix take AW pixels per beat in raster order,
// pixel a colour c bit b at ((a*3)+c)*8+b. out_valid/out_ready/out_scores give
// one score vector per image, class j at j*SCW. Latency is deterministic for a
// given set of parameters; every stage uses valid/ready flow control.
//
// Follows FPGN-6 at width multiplier 8: Agg m=16, conv m=16,32,64, strides
// 2,1,2,1,2,1, two FC layers of 2000 LUTs and a group sum. Own choices: 3x3
// kernels with padding 1, pairing layers (1,2), (3,4), (5,6) into residual
// blocks with those channel counts, per-colour aggregation, all unroll factors 1
// by default, and the valid/ready links.
module fpgn_top
  import fpgn_pkg::*;
#(
  parameter int unsigned IMG_W  = 32,
  parameter int unsigned IMG_H  = 32,
  parameter int unsigned NCOL   = 3,
  parameter int unsigned PB     = 8,
  parameter int unsigned WK     = 8,
  parameter int unsigned M_AGG  = 16,
  parameter int unsigned M_C1   = 16,
  parameter int unsigned M_C2   = 32,
  parameter int unsigned M_C3   = 64,
  parameter int unsigned KS     = 3,
  parameter int unsigned FC1    = 2000,
  parameter int unsigned FC2    = 2000,
  parameter int unsigned NCLS   = 10,
  parameter int unsigned AW     = 1,
  parameter int unsigned WU1    = 1,
  parameter int unsigned WU2    = 1,
  parameter int unsigned WU3    = 1,
  parameter int unsigned WU4    = 1,
  parameter int unsigned WU5    = 1,
  parameter int unsigned WU6    = 1,
  parameter int unsigned PC_PER = 2,
  localparam int unsigned NA    = (M_AGG / 3) * WK,
  localparam int unsigned SCW   = cnt_w(FC2 / NCLS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [AW*NCOL*PB-1:0]      in_pix,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [NCLS*SCW-1:0]        out_scores
);
  localparam int unsigned PAD = KS / 2;

  function automatic int unsigned wu_of(input int unsigned i);
    case (i)
      0: return WU1;
      1: return WU2;
      2: return WU3;
      3: return WU4;
      4: return WU5;
      default: return WU6;
    endcase
  endfunction
  function automatic int unsigned stride_of(input int unsigned i);
    return (i % 2 == 0) ? 2 : 1;
  endfunction
  function automatic int unsigned cout_of(input int unsigned i);
    return ((i < 2) ? M_C1 : (i < 4) ? M_C2 : M_C3) * WK;
  endfunction
  function automatic int unsigned cin_of(input int unsigned i);
    return (i == 0) ? NCOL * NA : cout_of(i - 1);
  endfunction
  // Input side length of conv layer i (square maps: width and height alike).
  function automatic int unsigned w_in(input int unsigned i, input int unsigned w0);
    int unsigned w;
    w = w0;
    for (int unsigned j = 0; j < i; j++) w = (w + 2 * PAD - KS) / stride_of(j) + 1;
    return w;
  endfunction
  function automatic int unsigned pw_of(input int unsigned i);
    return (i == 0) ? AW : wu_of(i - 1);
  endfunction
  function automatic int unsigned nl_of(input int unsigned i);
    return ceil_div(KS * KS * cin_of(i), LUT_K);
  endfunction

  // The identity word of a block's second layer is the first layer's output
  // beat, so both layers of a block must use the same column unroll.
  initial begin
    assert (WU1 == WU2 && WU3 == WU4 && WU5 == WU6)
      else $error("fpgn_top: both layers of a residual block need the same unroll factor");
  end

  localparam int unsigned WF   = w_in(6, IMG_W);  // final map width
  localparam int unsigned HF   = w_in(6, IMG_H);  // final map height
  localparam int unsigned CF   = cout_of(5);
  localparam int unsigned FLAT = WF * HF * CF;

  // ---------------------------------------------------------------- aggregation
  logic                      agg_valid, agg_ready;
  logic [AW*NCOL*NA-1:0]     agg_bits;

  agg_layer #(.AW(AW), .NCOL(NCOL), .PB(PB), .NA(NA), .SEED(32'h0001_0000)) u_agg (
    .clk, .rst_n,
    .in_valid(in_valid), .in_ready(in_ready), .in_pix(in_pix),
    .out_valid(agg_valid), .out_ready(agg_ready), .out_bits(agg_bits)
  );

  // ---------------------------------------------------------------- conv stack
  for (genvar i = 0; i < 6; i++) begin : g_l
    localparam int unsigned CI   = cin_of(i);
    localparam int unsigned CO   = cout_of(i);
    localparam int unsigned S    = stride_of(i);
    localparam int unsigned WI   = w_in(i, IMG_W);
    localparam int unsigned HI   = w_in(i, IMG_H);
    localparam int unsigned WO   = w_in(i + 1, IMG_W);
    localparam int unsigned WUI  = wu_of(i);
    localparam int unsigned PWI  = pw_of(i);
    localparam int unsigned B    = KS * KS * CI;
    localparam bit          RES  = (i % 2 == 1);
    localparam int unsigned RW   = RES ? cnt_w(nl_of(i - 1)) : 1;
    localparam int unsigned RMAX = RES ? nl_of(i - 1) : 0;
    localparam int unsigned NL   = nl_of(i);
    localparam int unsigned SW   = RES ? (((cnt_w(NL) > RW) ? cnt_w(NL) : RW) + 1) : cnt_w(NL);

    // input side: the previous stage's stream
    logic               lb_in_valid, lb_in_ready;
    logic [PWI*CI-1:0]  lb_in_data;
    // window stream
    logic               win_valid, win_ready, win_last;
    logic [WUI*B-1:0]   win;
    // conv output
    logic               o_valid, o_ready;
    logic [WUI*CO-1:0]  o_bits;
    logic [WUI*CO*SW-1:0] o_int;
    // residual input
    logic               r_valid, r_ready;
    logic [WUI*CO*RW-1:0] r_data;

    line_buffer #(.C(CI), .W(WI), .H(HI), .K(KS), .S(S), .P(PAD), .WU(WUI), .PW(PWI)) u_lb (
      .clk, .rst_n,
      .in_valid(lb_in_valid), .in_ready(lb_in_ready), .in_data(lb_in_data),
      .out_valid(win_valid), .out_ready(win_ready), .out_win(win), .out_last(win_last)
    );

    conv_layer #(.CIN(CI), .COUT(CO), .K(KS), .WU(WUI), .PC_PER(PC_PER), .RES(RES),
                 .RW(RW), .RES_MAX(RMAX), .SEED(32'(i + 2) << 16)) u_conv (
      .clk, .rst_n,
      .in_valid(win_valid), .in_ready(win_ready), .in_win(win),
      .res_valid(r_valid), .res_ready(r_ready), .res_data(r_data),
      .out_valid(o_valid), .out_ready(o_ready), .out_bits(o_bits), .out_int(o_int)
    );

    // the integer sums of a block's second layer, its residual handshake in a
    // block's first layer and the frame-end flag are not needed here
    logic unused_l;
    assign unused_l = ^{win_last, r_ready, o_int};

    if (RES) begin : g_res
      // second layer of a residual block: identity sums come from the FIFO
      assign r_valid = g_l[i-1].g_blk.f_valid;
      assign r_data  = g_l[i-1].g_blk.f_data;
    end else begin : g_blk
      // first layer of a residual block: fork its output to the next line
      // buffer (bits) and to the identity FIFO (integer sums)
      localparam int unsigned DEPTH = ((KS + stride_of(i + 1) + 1) * WO) / WUI + 8;
      logic                  f_in_ready, f_valid, f_ready;
      logic [WUI*CO*SW-1:0]  f_data;
      res_fifo #(.W(WUI*CO*SW), .DEPTH(DEPTH)) u_fifo (
        .clk, .rst_n,
        .in_valid(o_valid && g_l[i+1].lb_in_ready), .in_ready(f_in_ready), .in_data(o_int),
        .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data)
      );
      assign f_ready = g_l[i+1].r_ready;
      assign r_valid = 1'b0;
      assign r_data  = '0;
    end
  end

  // ---------------------------------------------------------------- stream links
  assign g_l[0].lb_in_valid = agg_valid;
  assign g_l[0].lb_in_data  = agg_bits;
  assign agg_ready          = g_l[0].lb_in_ready;

  for (genvar i = 1; i < 6; i++) begin : g_link
    if (i % 2 == 1) begin : g_fork
      assign g_l[i].lb_in_valid = g_l[i-1].o_valid && g_l[i-1].g_blk.f_in_ready;
      assign g_l[i-1].o_ready   = g_l[i].lb_in_ready && g_l[i-1].g_blk.f_in_ready;
    end else begin : g_plain
      assign g_l[i].lb_in_valid = g_l[i-1].o_valid;
      assign g_l[i-1].o_ready   = g_l[i].lb_in_ready;
    end
    assign g_l[i].lb_in_data = g_l[i-1].o_bits;
  end

  // ---------------------------------------------------------------- output stage
  logic            fl_valid, fl_ready;
  logic [FLAT-1:0] fl_vec;
  logic            f1_valid, f1_ready;
  logic [FC1-1:0]  f1_vec;
  logic            f2_valid, f2_ready;
  logic [FC2-1:0]  f2_vec;

  flatten_buffer #(.C(CF), .NPIX(WF * HF), .PW(WU6)) u_flat (
    .clk, .rst_n,
    .in_valid(g_l[5].o_valid), .in_ready(g_l[5].o_ready), .in_data(g_l[5].o_bits),
    .out_valid(fl_valid), .out_ready(fl_ready), .out_vec(fl_vec)
  );

  fc_layer #(.M(FLAT), .N(FC1), .SEED(32'h0010_0000)) u_fc1 (
    .clk, .rst_n,
    .in_valid(fl_valid), .in_ready(fl_ready), .in_vec(fl_vec),
    .out_valid(f1_valid), .out_ready(f1_ready), .out_vec(f1_vec)
  );

  fc_layer #(.M(FC1), .N(FC2), .SEED(32'h0011_0000)) u_fc2 (
    .clk, .rst_n,
    .in_valid(f1_valid), .in_ready(f1_ready), .in_vec(f1_vec),
    .out_valid(f2_valid), .out_ready(f2_ready), .out_vec(f2_vec)
  );

  group_sum #(.N(FC2), .NCLS(NCLS), .PC_PER(PC_PER)) u_gs (
    .clk, .rst_n,
    .in_valid(f2_valid), .in_ready(f2_ready), .in_vec(f2_vec),
    .out_valid(out_valid), .out_ready(out_ready), .scores(out_scores)
  );
endmodule
