// line_buffer: stationary-window circular line buffer between two layers.
//
// A conventional line buffer reads a sliding K x K window from moving
// addresses, which needs wide multiplexers. Here the read window never moves:
// it is always columns 0 .. K+(WU-1)*S-1 of the K "active" rows. The data move
// instead:
//   * after every window read (a "fire"), all active rows rotate left by WU*S
//     columns, circularly, which brings the next WU window positions under the
//     fixed window (horizontal circular shift);
//   * after the last fire of an output row, the rows move up by S (vertical row
//     promotion): active row r takes active row r+S, re-aligned by the fixed
//     rotation the row went through, and the bottom S active rows take the S
//     fill rows the producer has written meanwhile.
// Every register therefore has a fixed, small set of sources (hold, rotate,
// promote, write), whatever the image width.
//
// The producer writes its rows, PW pixels per beat, into S fill rows while the
// consumer works on the active rows, so writing and reading overlap. A fill
// row is a shift register that takes the new pixels at its end. Storage is K
// active rows of W+2P pixels plus S fill rows of W pixels (one chunk plus the
// producer's rows). Zero padding of P pixels around the image is built in:
// the pad columns of the active rows are constant zero when a row is promoted,
// and rows above or below the image are promoted as zeros.
//
// Frame sequencing: after reset the active rows hold zeros and the buffer
// "primes" (promotes without firing) until the first window row is image row
// -P. After the last window of the frame it returns to that state and accepts
// the next frame. Row unrolling (several output rows per fire) is not built:
// one output row is produced per chunk.
//
// Interface: in_valid/in_ready/in_data take PW pixels of C bits (pixel p at
// p*C) in raster order; in_ready depends on registers only. out_valid/
// out_ready/out_win give WU windows per fire; window u, row r, column c,
// channel ch is at bit ((u*K + r)*K + c)*C + ch. out_last marks the frame's
// last fire. A fire takes one cycle, a promotion one cycle.
//
// The fixed read window, horizontal circular shift, vertical row promotion and
// concurrent producer writes follow the network's stationary-window circular
// line buffer. The fill-row scheme, built-in zero padding, frame sequencing and
// handshake are this design's own; row unrolling (h > 1) is not built.
module line_buffer #(
  parameter int unsigned C  = 8,
  parameter int unsigned W  = 8,
  parameter int unsigned H  = 8,
  parameter int unsigned K  = 3,
  parameter int unsigned S  = 1,
  parameter int unsigned P  = K / 2,
  parameter int unsigned WU = 1,
  parameter int unsigned PW = 1,
  localparam int unsigned WP   = W + 2 * P,
  localparam int unsigned WOUT = (WP - K) / S + 1,
  localparam int unsigned HOUT = (H + 2 * P - K) / S + 1,
  localparam int unsigned OWW  = WU * K * K * C
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [PW*C-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OWW-1:0]   out_win,
  output logic             out_last
);
  localparam int unsigned NSTEP = WOUT / WU;                // fires per output row
  localparam int unsigned ROT   = (S * WOUT) % WP;          // rotation of a row per chunk
  localparam int unsigned SH    = (WU * S) % WP;            // rotation per fire
  localparam int          NPRI  = (K - P + S - 1) / S;      // priming promotions
  localparam int          TOP0  = -int'(P) - int'(S) * NPRI; // image row of active row 0 after reset
  localparam int          TOPL  = -int'(P) + int'(S) * (int'(HOUT) - 1);

  initial begin
    assert (K >= S) else $error("line_buffer: stride larger than kernel");
    assert (WOUT % WU == 0) else $error("line_buffer: WU must divide the output width");
    assert (W % PW == 0) else $error("line_buffer: PW must divide the width");
    assert (K + (WU - 1) * S <= WP) else $error("line_buffer: window wider than a row");
    assert (P + 1 >= S) else $error("line_buffer: every image row must reach a window");
  end

  logic [C-1:0] act  [K][WP];
  logic [C-1:0] fill [S][W];

  int          top;      // image row held by active row 0
  int unsigned step;     // fires done in the current chunk
  int unsigned wr_row;   // image row the producer is writing
  int unsigned wr_col;   // next column the producer writes

  logic primed, chunk_done, fills_ready, promote, fire, frame_end;
  int   wslot;

  assign primed     = top >= -int'(P);
  assign chunk_done = step == NSTEP;
  assign wslot      = int'(wr_row) - top - int'(K);
  assign in_ready   = (wr_row < H) && (wslot >= 0) && (wslot < int'(S));

  always_comb begin
    fills_ready = 1'b1;
    for (int j = 0; j < int'(S); j++) begin
      int r;
      r = top + int'(K) + j;
      if (r >= 0 && r < int'(H) && int'(wr_row) <= r) fills_ready = 1'b0;
    end
  end

  assign out_valid = primed && !chunk_done;
  assign fire      = out_valid && out_ready;
  assign out_last  = (top == TOPL) && (step == NSTEP - 1);
  assign frame_end = (top == TOPL) && chunk_done;
  assign promote   = (!primed || chunk_done) && !frame_end && fills_ready;

  // Fixed read window.
  always_comb begin
    for (int unsigned u = 0; u < WU; u++)
      for (int unsigned r = 0; r < K; r++)
        for (int unsigned c = 0; c < K; c++)
          out_win[((u*K + r)*K + c)*C +: C] = act[r][u*S + c];
  end

  // Producer side.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_row <= 0;
      wr_col <= 0;
    end else if (frame_end) begin
      wr_row <= 0;
      wr_col <= 0;
    end else if (in_valid && in_ready) begin
      if (wr_col + PW == W) begin
        wr_col <= 0;
        wr_row <= wr_row + 1;
      end else begin
        wr_col <= wr_col + PW;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      for (int j = 0; j < int'(S); j++) begin
        if (j == wslot) begin
          for (int unsigned c = 0; c + PW < W; c++) fill[j][c] <= fill[j][c + PW];
          for (int unsigned p = 0; p < PW; p++) fill[j][W - PW + p] <= in_data[p*C +: C];
        end
      end
    end
  end

  // Consumer side: circular shift, row promotion, frame restart.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      top  <= TOP0;
      step <= 0;
      for (int unsigned r = 0; r < K; r++)
        for (int unsigned c = 0; c < WP; c++) act[r][c] <= '0;
    end else if (frame_end) begin
      top  <= TOP0;
      step <= 0;
      for (int unsigned r = 0; r < K; r++)
        for (int unsigned c = 0; c < WP; c++) act[r][c] <= '0;
    end else if (fire) begin
      step <= step + 1;
      for (int unsigned r = 0; r < K; r++)
        for (int unsigned c = 0; c < WP; c++) act[r][c] <= act[r][(c + SH) % WP];
    end else if (promote) begin
      top  <= top + int'(S);
      step <= 0;
      for (int unsigned r = 0; r + S < K; r++)
        for (int unsigned c = 0; c < WP; c++)
          act[r][c] <= primed ? act[r + S][(c + WP - ROT) % WP] : act[r + S][c];
      for (int unsigned j = 0; j < S; j++) begin
        int ir;
        ir = top + int'(K) + int'(j);
        for (int unsigned c = 0; c < WP; c++)
          act[K - S + j][c] <= (ir >= 0 && ir < int'(H) && c >= P && c < P + W) ? fill[j][(c + W - P) % W] : '0;
      end
    end
  end

endmodule
