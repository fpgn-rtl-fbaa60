// fc_layer: fully-connected layer made of one LUT-vector.
//
// N k-LUT neurons read the M-bit input with in-order, locality-aware padded
// wiring (no arbitrary connections, so routing stays local). With M < k*N the
// later LUTs re-read the padded input from the start, which spreads the
// fan-out evenly over the input bits. The binary outputs are registered: one
// register stage after the LUT level, one vector per cycle, valid/ready on
// both sides. LUT configurations are stand-ins derived from SEED.
//
// A fully connected layer as one LUT-vector with locality-aware padding follows
// the network (2000 LUTs per layer in FPGN-6). The single register stage and
// handshake are this design's own.
module fc_layer
  import fpgn_pkg::*;
#(
  parameter int unsigned M    = 12,
  parameter int unsigned N    = 4,
  parameter int unsigned K    = LUT_K,
  parameter logic [31:0] SEED = 32'h0010_0000
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [M-1:0] in_vec,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [N-1:0] out_vec
);
  logic [N-1:0] y;

  lut_vector #(.M(M), .N(N), .K(K), .SEED(SEED)) u_lv (.x(in_vec), .y(y));

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_vec   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_vec <= y;
    end
  end
endmodule
