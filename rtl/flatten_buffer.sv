// flatten_buffer: collects the last feature map into one in-order bit-vector.
//
// The fully-connected layers need the whole NPIX-pixel feature map at once.
// Pixels arrive in raster order, PW per beat, C bits each, and are shifted in
// so that pixel p ends at bits p*C +: C of out_vec (in-order flattening: the
// map's natural order is the wire order, so the FC LUTs are fed locally).
// When NPIX pixels are held, out_valid rises and the vector is held until
// taken; meanwhile in_ready is low. The beat completing the map is presented
// in the next cycle.
//
// In-order flattening follows the network. Raster order with channels fastest,
// and holding one full map, are this design's choices.
module flatten_buffer #(
  parameter int unsigned C    = 8,
  parameter int unsigned NPIX = 16,
  parameter int unsigned PW   = 1,
  localparam int unsigned NB  = NPIX / PW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [PW*C-1:0]   in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [NPIX*C-1:0] out_vec
);
  initial assert (NPIX % PW == 0) else $error("flatten_buffer: PW must divide NPIX");

  logic [$clog2(NB+1)-1:0] cnt;

  assign out_valid = cnt == ($clog2(NB+1))'(NB);
  assign in_ready  = !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (out_valid && out_ready) cnt <= '0;
    else if (in_valid && in_ready) cnt <= cnt + 1'b1;
  end

  if (NB > 1) begin : g_shift
    always_ff @(posedge clk)
      if (in_valid && in_ready) out_vec <= {in_data, out_vec[NPIX*C-1 -: (NPIX-PW)*C]};
  end else begin : g_single
    always_ff @(posedge clk)
      if (in_valid && in_ready) out_vec <= in_data;
  end
endmodule
