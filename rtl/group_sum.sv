// group_sum: popcount-based group sum that turns the last FC layer's bits into
// class scores.
//
// The N input bits are cut in order into NCLS groups of N/NCLS consecutive
// bits; the score of class j is the number of ones in group j, counted by a
// pipelined popcount. Scores are unsigned SW-bit integers; the class with the
// highest score is the prediction (the comparison is left to the consumer).
// Latency pc_latency(N/NCLS, PC_PER) + 1 cycles (the popcount, then an output
// register); the pipeline stalls as a whole when the output is not taken.
//
// The popcount group sum follows the network's classification head. Contiguous
// groups and the pipeline/handshake are this design's choices.
module group_sum
  import fpgn_pkg::*;
#(
  parameter int unsigned N      = 20,
  parameter int unsigned NCLS   = 10,
  parameter int unsigned PC_PER = 2,
  localparam int unsigned G     = N / NCLS,
  localparam int unsigned SW    = cnt_w(G)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [N-1:0]       in_vec,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [NCLS*SW-1:0] scores
);
  initial assert (N % NCLS == 0) else $error("group_sum: NCLS must divide N");

  localparam int unsigned PL  = pc_latency(G, PC_PER);
  localparam int unsigned LAT = PL + 1;

  logic [LAT-1:0]     v;
  logic               adv;
  logic [NCLS*SW-1:0] cnt;

  assign adv       = !v[LAT-1] || out_ready;
  assign in_ready  = adv;
  assign out_valid = v[LAT-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else if (adv) v <= {v[LAT-2:0], in_valid};
  end

  for (genvar j = 0; j < NCLS; j++) begin : g_cls
    popcount #(.N(G), .PER(PC_PER)) u_pc (
      .clk(clk), .en(adv), .x(in_vec[j*G +: G]), .y(cnt[j*SW +: SW])
    );
  end

  always_ff @(posedge clk) if (adv) scores <= cnt;
endmodule
