// res_fifo: first-in first-out queue for the identity path of a residual block.
//
// The first convolution of a residual block hands its integer sums (before
// binarisation) to the second convolution, which adds them before its own
// threshold. Both layers emit pixels in the same raster order, so a FIFO keeps
// them aligned while the line buffer between the two layers holds the second
// layer's input. DEPTH must cover how far the first layer can run ahead: about
// (kernel + stride + 1) rows of its output.
//
// Interface: valid/ready on both sides; in_ready = not full, out_valid = not
// empty. A word written in cycle t can be read from cycle t+1. Memory is a
// register array with binary read/write pointers.
//
// The identity path is part of the network's residual blocks; how it is stored
// is not specified, so the register FIFO and its handshake are this design's own.
module res_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned AW = (DEPTH <= 1) ? 1 : $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;
  logic          push, pop;

  assign in_ready  = cnt != (AW+1)'(DEPTH);
  assign out_valid = cnt != '0;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end
endmodule
