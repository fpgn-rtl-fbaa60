// agg_layer: pixel-wise aggregation stage that turns raw pixel bits into
// binary features without any floating-point preprocessing.
//
// Each of the NCOL colour channels of a pixel is a PB-bit value. For every
// colour, NA aggregation channels each reduce the colour's PB bits to a single
// activation with their own LUT-tree (a 1x1 "convolution" whose kernel is a
// LUT-tree), so one pixel gives NCOL*NA output bits. AW pixels are processed
// per beat (the layer's unroll factor); the trees are replicated AW times and
// share their configurations, as a convolution kernel is shared over pixels.
// Feeding each tree one colour's bits follows the figure of the network, which
// splits the input pixel into r, g and b before aggregation.
//
// Interface: valid/ready stream in and out. in_pix holds pixel a, colour c,
// bit b at ((a*NCOL)+c)*PB+b; out_bits holds pixel a, colour c, channel j at
// ((a*NCOL)+c)*NA+j. Timing: one register stage; a beat accepted in cycle t
// is presented in cycle t+1, and one beat per cycle is sustained.
//
// The LUT-tree as a 1x1 kernel over a pixel's bits follows the aggregation
// stage (8 input bits, (16/3)*8 = 40 channels). Giving each colour its own 40
// trees, the output register and the handshake are this design's choices.
module agg_layer
  import fpgn_pkg::*;
#(
  parameter int unsigned AW   = 1,
  parameter int unsigned NCOL = 3,
  parameter int unsigned PB   = 8,
  parameter int unsigned NA   = 40,
  parameter int unsigned K    = LUT_K,
  parameter logic [31:0] SEED = 32'h0001_0000,
  localparam int unsigned IW  = AW * NCOL * PB,
  localparam int unsigned OWD = AW * NCOL * NA
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [IW-1:0]  in_pix,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [OWD-1:0] out_bits
);
  logic [OWD-1:0] act;

  for (genvar a = 0; a < AW; a++) begin : g_pix
    for (genvar c = 0; c < NCOL; c++) begin : g_col
      for (genvar j = 0; j < NA; j++) begin : g_ch
        lut_tree #(.N_I(PB), .K(K), .SEED(SEED + 32'(c * NA + j))) u_tree (
          .x(in_pix[(a*NCOL+c)*PB +: PB]),
          .y(act[(a*NCOL+c)*NA + j])
        );
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_bits  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_bits <= act;
    end
  end
endmodule
