// tb_fpgn_top_full: end-to-end test of fpgn_top
// at its default size (32x32 RGB images, FPGN-6 at width multiplier 8,
// 2000-LUT FC layers).
//
// Random images are streamed in; a behavioural model of the whole network
// (aggregation trees, padded 3x3 LUT convolutions with residual sums and
// thresholds, in-order flattening, two FC LUT layers, group sums), written
// over plain arrays, computes the expected class scores, which are compared
// with the accelerator's.
// One image is sent at full rate with the output always taken.
// Counted and required: window fires, unrolled fires (several windows per
// cycle), row promotions, frame restarts, producer writes that overlap window
// reads, residual additions, input stalls and output back-pressure.
//
// Stimulus, checks and counters are this testbench's own; expected values come
// from the network's definitions, computed independently of the RTL.
module tb_fpgn_top_full;
  import fpgn_ref_pkg::*;
  localparam int IMG_W = 32, IMG_H = 32, WK = 8, FC1 = 2000, FC2 = 2000, NCLS = 10;
  localparam int AW = 1;
  localparam int WU [6] = '{1, 1, 1, 1, 1, 1};
  localparam int NIMG = 1;
  localparam int NA = (16 / 3) * WK;
  localparam int G = FC2 / NCLS;
  localparam int SCW = fpgn_pkg::cnt_w(G);
  localparam int CO [6] = '{16*WK, 16*WK, 32*WK, 32*WK, 64*WK, 64*WK};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [AW*24-1:0] in_pix;
  logic [NCLS*SCW-1:0] out_scores;

  fpgn_top  dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------------------------------------------------------- reference
  bit [7:0] img [NIMG][IMG_H][IMG_W][3];
  int exp_scores [NIMG][NCLS];

  task automatic model(int n);
    bits_t fm, nf, flat, f1, f2;
    ints_t sums, prev_sums;
    int h, w, c, prev_nl;
    h = IMG_H; w = IMG_W; c = 3 * NA;
    fm = new[h * w * c];
    for (int r = 0; r < h; r++) for (int q = 0; q < w; q++) for (int col = 0; col < 3; col++) begin
      bits_t b;
      b = new[8];
      foreach (b[i]) b[i] = img[n][r][q][col][i];
      for (int j = 0; j < NA; j++) fm[(r*w + q)*c + col*NA + j] = ref_tree(b, 32'h0001_0000 + 32'(col*NA + j), 6);
    end
    prev_nl = 0;
    for (int l = 0; l < 6; l++) begin
      int s, ho, wo, nl;
      bit res;
      s = (l % 2 == 0) ? 2 : 1;
      res = (l % 2 == 1);
      ho = (h + 2 - 3) / s + 1; wo = (w + 2 - 3) / s + 1;
      nl = (9 * c + 5) / 6;
      nf = new[ho * wo * CO[l]];
      sums = new[ho * wo * CO[l]];
      for (int orow = 0; orow < ho; orow++) for (int ocol = 0; ocol < wo; ocol++) begin
        bits_t win;
        win = new[9 * c];
        for (int kr = 0; kr < 3; kr++) for (int kc = 0; kc < 3; kc++) for (int ch = 0; ch < c; ch++) begin
          int ir, ic;
          ir = orow * s - 1 + kr; ic = ocol * s - 1 + kc;
          win[(kr*3 + kc)*c + ch] = (ir >= 0 && ir < h && ic >= 0 && ic < w) ? fm[(ir*w + ic)*c + ch] : 1'b0;
        end
        for (int o = 0; o < CO[l]; o++) begin
          bits_t y;
          int sum, idx;
          idx = (orow*wo + ocol)*CO[l] + o;
          y = ref_lut_layer(win, nl, (32'(l + 2) << 16) + 32'(o), 6);
          sum = ref_popcount(y) + (res ? prev_sums[idx] : 0);
          sums[idx] = sum;
          nf[idx] = sum >= int'(fpgn_pkg::bn_thresh(32'(l + 2) << 16, o, nl + (res ? prev_nl : 0)));
        end
      end
      prev_sums = sums; prev_nl = nl;
      fm = nf; h = ho; w = wo; c = CO[l];
    end
    flat = fm;   // raster order, channel fastest
    f1 = ref_lut_layer(flat, FC1, 32'h0010_0000, 6);
    f2 = ref_lut_layer(f1, FC2, 32'h0011_0000, 6);
    for (int j = 0; j < NCLS; j++) begin
      exp_scores[n][j] = 0;
      for (int i = 0; i < G; i++) exp_scores[n][j] += int'(f2[j*G + i]);
    end
  endtask

  // ---------------------------------------------------------------- counters
  int n_fire = 0, n_unr = 0, n_prom = 0, n_restart = 0, n_overlap = 0, n_res = 0;
  int n_in_stall = 0, n_backpressure = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_l[0].u_lb.fire) begin n_fire++; if (WU[0] > 1) n_unr++; end
    if (dut.g_l[1].u_lb.fire) begin n_fire++; if (WU[1] > 1) n_unr++; end
    if (dut.g_l[2].u_lb.fire) begin n_fire++; if (WU[2] > 1) n_unr++; end
    if (dut.g_l[3].u_lb.fire) begin n_fire++; if (WU[3] > 1) n_unr++; end
    if (dut.g_l[4].u_lb.fire) begin n_fire++; if (WU[4] > 1) n_unr++; end
    if (dut.g_l[5].u_lb.fire) begin n_fire++; if (WU[5] > 1) n_unr++; end
    if (dut.g_l[0].u_lb.promote || dut.g_l[3].u_lb.promote || dut.g_l[5].u_lb.promote) n_prom++;
    if (dut.g_l[0].u_lb.frame_end || dut.g_l[5].u_lb.frame_end) n_restart++;
    if (dut.g_l[0].u_lb.fire && dut.g_l[0].lb_in_valid && dut.g_l[0].lb_in_ready) n_overlap++;
    if (dut.g_l[1].u_lb.fire && dut.g_l[1].lb_in_valid && dut.g_l[1].lb_in_ready) n_overlap++;
    if (dut.g_l[2].u_lb.fire && dut.g_l[2].lb_in_valid && dut.g_l[2].lb_in_ready) n_overlap++;
    if (dut.g_l[3].u_lb.fire && dut.g_l[3].lb_in_valid && dut.g_l[3].lb_in_ready) n_overlap++;
    if (dut.g_l[4].u_lb.fire && dut.g_l[4].lb_in_valid && dut.g_l[4].lb_in_ready) n_overlap++;
    if (dut.g_l[5].u_lb.fire && dut.g_l[5].lb_in_valid && dut.g_l[5].lb_in_ready) n_overlap++;
    if (dut.g_l[1].r_ready || dut.g_l[3].r_ready || dut.g_l[5].r_ready) n_res++;
    if (in_valid && !in_ready) n_in_stall++;
    if (out_valid && !out_ready) n_backpressure++;
  end

  // ---------------------------------------------------------------- stimulus
  int n_out = 0;
  int t_first [NIMG], t_done [NIMG];
  bit random_flow;

  task automatic send(int n);
    for (int p = 0; p < IMG_W * IMG_H; p += AW) begin
      @(negedge clk);
      in_valid = random_flow ? ($urandom % 3 != 0) : 1'b1;
      for (int a = 0; a < AW; a++)
        for (int col = 0; col < 3; col++)
          in_pix[(a*3 + col)*8 +: 8] = img[n][(p + a) / IMG_W][(p + a) % IMG_W][col];
      #1;
      while (!(in_valid && in_ready)) begin
        @(negedge clk);
        in_valid = random_flow ? ($urandom % 3 != 0) : 1'b1;
        #1;
      end
      if (p == 0) t_first[n] = cyc;
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    forever begin
      @(negedge clk);
      out_ready = random_flow ? ($urandom % 2 == 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        for (int j = 0; j < NCLS; j++) begin
          checks++;
          if (int'(out_scores[j*SCW +: SCW]) != exp_scores[n_out][j]) begin
            failures++;
            $display("image %0d class %0d score %0d expected %0d", n_out, j, out_scores[j*SCW +: SCW], exp_scores[n_out][j]);
          end
        end
        t_done[n_out] = cyc;
        n_out++;
      end
    end
  end

  initial begin
    in_valid = 0; in_pix = '0; out_ready = 1; random_flow = 0;
    for (int n = 0; n < NIMG; n++)
      for (int r = 0; r < IMG_H; r++) for (int q = 0; q < IMG_W; q++) for (int col = 0; col < 3; col++)
        img[n][r][q][col] = 8'($urandom);
    for (int n = 0; n < NIMG; n++) model(n);
    $display("reference model done");
    repeat (3) @(posedge clk);
    rst_n = 1;
    send(0);
    wait (n_out == 1);
    $display("latency first pixel to scores: %0d cycles", t_done[0] - t_first[0]);
    repeat (5) @(posedge clk);
    $display("windows=%0d unrolled=%0d promotions=%0d restarts=%0d overlapped=%0d residual_adds=%0d in_stalls=%0d backpressure=%0d",
             n_fire, n_unr, n_prom, n_restart, n_overlap, n_res, n_in_stall, n_backpressure);
    checks += 5;
    if (n_out != NIMG) failures++;
    if (n_fire == 0) failures++;
    if (n_prom == 0) failures++;
    if (n_overlap == 0) failures++;
    if (n_res == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d images scored", n_out, NIMG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
