// tb_line_buffer: streams two frames through three line buffers and checks
// every window against windows cut directly from the zero-padded image:
//   A: 3x3, stride 1, 6x5 image, one pixel per beat, one window per fire;
//   B: 3x3, stride 2, 8x6 image, two pixels per beat, two windows per fire
//      (output width 4, so WU = 2);
//   C: 3x3, stride 1, 6x4 image, two windows per fire.
// Valid and ready are random. Also counted: fires, promotions, cycles in
// which the producer writes while the consumer reads (the two sides overlap),
// and producer stalls; each must occur. The number of fires per frame is
// checked, and so is out_last.
//
// Stimulus, checks and counters are this testbench's own; expected values come
// from the network's definitions, computed independently of the RTL.
module tb_line_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int fires = 0, promotes = 0, overlap = 0, pstall = 0;

  // One instance with its driver and checker.
  `define LB_CASE(NAME, C_, W_, H_, S_, WU_, PW_)                                              \
  localparam int NAME``_WO = (W_ + 2 - 3) / S_ + 1, NAME``_HO = (H_ + 2 - 3) / S_ + 1;          \
  bit NAME``_hi, NAME``_ho;                                                                    \
  logic NAME``_iv, NAME``_ir, NAME``_ov, NAME``_or, NAME``_last;                               \
  logic [PW_*C_-1:0] NAME``_id;                                                                \
  logic [WU_*9*C_-1:0] NAME``_win;                                                             \
  line_buffer #(.C(C_), .W(W_), .H(H_), .K(3), .S(S_), .WU(WU_), .PW(PW_)) NAME (               \
    .clk, .rst_n, .in_valid(NAME``_iv), .in_ready(NAME``_ir), .in_data(NAME``_id),             \
    .out_valid(NAME``_ov), .out_ready(NAME``_or), .out_win(NAME``_win), .out_last(NAME``_last)); \
  logic [C_-1:0] NAME``_img [2][H_][W_];                                                       \
  int NAME``_wf = 0, NAME``_wp = 0, NAME``_rf = 0, NAME``_rp = 0;                              \
  initial begin                                                                                \
    for (int f = 0; f < 2; f++) for (int r = 0; r < H_; r++) for (int c = 0; c < W_; c++)     \
      NAME``_img[f][r][c] = C_'($urandom);                                                     \
    NAME``_iv = 0; NAME``_or = 0; NAME``_id = '0;                                              \
    @(posedge rst_n);                                                                          \
    forever begin                                                                              \
      @(negedge clk);                                                                          \
      NAME``_iv = (NAME``_wf < 2) && ($urandom % 4 != 0);                                      \
      NAME``_or = $urandom % 3 != 0;                                                           \
      for (int p = 0; p < PW_; p++)                                                            \
        NAME``_id[p*C_ +: C_] = (NAME``_wf < 2) ?                                              \
          NAME``_img[NAME``_wf][(NAME``_wp + p) / W_][(NAME``_wp + p) % W_] : '0;              \
      #1;                                                                                      \
      if (NAME``_iv && !NAME``_ir) pstall++;                                                   \
      if (NAME``_iv && NAME``_ir && NAME``_ov && NAME``_or) overlap++;                         \
      if (NAME``_ov && NAME``_or) begin                                                        \
        fires++;                                                                               \
        for (int u = 0; u < WU_; u++) begin                                                    \
          int orow, ocol;                                                                      \
          orow = (NAME``_rp * WU_ + u) / NAME``_WO;                                            \
          ocol = (NAME``_rp * WU_ + u) % NAME``_WO;                                            \
          for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) begin                        \
            int ir, ic;                                                                        \
            logic [C_-1:0] e;                                                                  \
            ir = orow * S_ - 1 + r; ic = ocol * S_ - 1 + c;                                    \
            e = (ir >= 0 && ir < H_ && ic >= 0 && ic < W_) ? NAME``_img[NAME``_rf][ir][ic] : '0; \
            checks++;                                                                          \
            if (NAME``_win[((u*3 + r)*3 + c)*C_ +: C_] != e) begin                             \
              failures++;                                                                      \
              $display(`"NAME frame %0d out (%0d,%0d) win (%0d,%0d)`", NAME``_rf, orow, ocol, r, c); \
            end                                                                                \
          end                                                                                  \
        end                                                                                    \
        checks++;                                                                              \
        if (NAME``_last != ((NAME``_rp + 1) * WU_ == NAME``_WO * NAME``_HO)) failures++;        \
      end                                                                                      \
      NAME``_hi = NAME``_iv && NAME``_ir; NAME``_ho = NAME``_ov && NAME``_or; @(posedge clk);                                                                          \
      if (NAME``_hi) begin                                                        \
        NAME``_wp += PW_;                                                                      \
        if (NAME``_wp == W_ * H_) begin NAME``_wp = 0; NAME``_wf++; end                        \
      end                                                                                      \
      if (NAME``_ho) begin                                                        \
        NAME``_rp++;                                                                           \
        if (NAME``_rp * WU_ == NAME``_WO * NAME``_HO) begin NAME``_rp = 0; NAME``_rf++; end    \
      end                                                                                      \
    end                                                                                        \
  end

  `LB_CASE(ua, 4, 6, 5, 1, 1, 1)
  `LB_CASE(ub, 3, 8, 6, 2, 2, 2)
  `LB_CASE(uc, 2, 6, 4, 1, 2, 2)

  always @(posedge clk) if (rst_n) begin
    if (ua.promote) promotes++;
    if (ub.promote) promotes++;
    if (uc.promote) promotes++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ua_rf == 2 && ub_rf == 2 && uc_rf == 2);
    repeat (2) @(posedge clk);
    checks += 4;
    if (fires != 2 * (6 * 5 + 4 * 3 / 2 + 6 * 4 / 2)) begin failures++; $display("fires %0d", fires); end
    if (promotes == 0) failures++;
    if (overlap == 0) failures++;
    if (pstall == 0) failures++;
    $display("fires=%0d promotions=%0d overlapped=%0d producer_stalls=%0d", fires, promotes, overlap, pstall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
