// tb_conv_layer: two LUT-Conv layers under random valid/ready.
//   A: residual layer, 3x3 kernel, 2 input and 3 output channels, two window
//      positions per beat; residual words come from a queue that is sometimes
//      empty, so the pipeline must wait for them.
//   B: plain layer, 3x3 kernel, 5 input channels, 4 output channels.
// Each output (bits and integer sums) is compared with a reference: LUT-vector
// over the flattened window, popcount, plus the residual word, against the
// channel threshold. Latency from acceptance to output is checked while the
// output is always taken and residual words are always present. At the end
// input stops and every accepted window must have produced its output.
//
// Stimulus, checks and counters are this testbench's own; expected values come
// from the network's definitions, computed independently of the RTL.
module tb_conv_layer;
  import fpgn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0, res_waits = 0, out_stalls = 0;
  bit free_run, drain = 0;
  always @(posedge clk) cyc++;

  `define CONV_CASE(NAME, CIN_, COUT_, WU_, RES_, RW_, RMAX_, SEED_)                           \
  localparam int NAME``_B = 9 * CIN_, NAME``_NL = (NAME``_B + 5) / 6;                          \
  localparam int NAME``_SW = RES_ ? ((fpgn_pkg::cnt_w(NAME``_NL) > RW_ ? fpgn_pkg::cnt_w(NAME``_NL) : RW_) + 1) : fpgn_pkg::cnt_w(NAME``_NL); \
  localparam int NAME``_LAT = fpgn_pkg::pc_latency(NAME``_NL, 2) + 2;                          \
  bit NAME``_hi, NAME``_ho, NAME``_hr;                                                         \
  logic NAME``_iv, NAME``_ir, NAME``_rv, NAME``_rr, NAME``_ov, NAME``_or;                      \
  logic [WU_*NAME``_B-1:0] NAME``_win;                                                         \
  logic [WU_*COUT_*RW_-1:0] NAME``_rd;                                                         \
  logic [WU_*COUT_-1:0] NAME``_bits;                                                           \
  logic [WU_*COUT_*NAME``_SW-1:0] NAME``_int;                                                  \
  conv_layer #(.CIN(CIN_), .COUT(COUT_), .K(3), .WU(WU_), .PC_PER(2), .RES(RES_), .RW(RW_),   \
               .RES_MAX(RMAX_), .SEED(SEED_)) NAME (                                          \
    .clk, .rst_n, .in_valid(NAME``_iv), .in_ready(NAME``_ir), .in_win(NAME``_win),             \
    .res_valid(NAME``_rv), .res_ready(NAME``_rr), .res_data(NAME``_rd),                        \
    .out_valid(NAME``_ov), .out_ready(NAME``_or), .out_bits(NAME``_bits), .out_int(NAME``_int)); \
  logic [WU_*NAME``_B-1:0] NAME``_wq [$];                                                      \
  logic [WU_*COUT_*RW_-1:0] NAME``_rq [$];                                                     \
  int NAME``_tq [$];                                                                           \
  int NAME``_nres = 0;                                                                         \
  initial begin                                                                                \
    NAME``_iv = 0; NAME``_or = 0; NAME``_rv = 0; NAME``_rd = '0; NAME``_win = '0;              \
    @(posedge rst_n);                                                                          \
    forever begin                                                                              \
      @(negedge clk);                                                                          \
      NAME``_iv = !drain && (free_run || ($urandom % 4 != 0));                                 \
      NAME``_or = drain || free_run || ($urandom % 3 != 0);                                    \
      for (int i = 0; i < WU_*NAME``_B; i += 32) NAME``_win[i +: 32] = $urandom;               \
      /* residual words: one per accepted window, offered after a random delay */              \
      NAME``_rv = RES_ && (NAME``_nres < NAME``_rq.size()) && (free_run || drain || $urandom % 3 != 0); \
      NAME``_rd = (NAME``_nres < NAME``_rq.size()) ? NAME``_rq[NAME``_nres] : '0;              \
      #1;                                                                                      \
      if (RES_ && NAME.v[NAME``_LAT-2] && !NAME``_rv) res_waits++;                             \
      if (NAME``_ov && !NAME``_or) out_stalls++;                                               \
      if (NAME``_ov && NAME``_or) begin                                                        \
        logic [WU_*NAME``_B-1:0] w;                                                            \
        logic [WU_*COUT_*RW_-1:0] rw;                                                          \
        w = NAME``_wq[0]; rw = NAME``_rq[0];                                                   \
        for (int u = 0; u < WU_; u++) begin                                                    \
          for (int c = 0; c < COUT_; c++) begin                                                \
            bits_t b, y;                                                                       \
            int s;                                                                             \
            b = new[NAME``_B];                                                                 \
            foreach (b[i]) b[i] = w[u*NAME``_B + i];                                           \
            y = ref_lut_layer(b, NAME``_NL, SEED_ + 32'(c), 6);                                \
            s = ref_popcount(y) + (RES_ ? int'(rw[(u*COUT_+c)*RW_ +: RW_]) : 0);               \
            checks += 2;                                                                       \
            if (int'(NAME``_int[(u*COUT_+c)*NAME``_SW +: NAME``_SW]) != s) begin               \
              failures++; $display(`"NAME sum u%0d c%0d got %0d exp %0d`", u, c,               \
                                   NAME``_int[(u*COUT_+c)*NAME``_SW +: NAME``_SW], s); end      \
            if (NAME``_bits[u*COUT_+c] != (s >= int'(fpgn_pkg::bn_thresh(SEED_, c, NAME``_NL + RMAX_)))) \
              begin failures++; $display(`"NAME bit u%0d c%0d`", u, c); end                     \
          end                                                                                  \
        end                                                                                    \
        if (free_run) begin                                                                    \
          checks++;                                                                            \
          if (cyc - NAME``_tq[0] != NAME``_LAT) begin failures++; $display(`"NAME latency %0d`", cyc - NAME``_tq[0]); end \
        end                                                                                    \
      end                                                                                      \
      NAME``_hi = NAME``_iv && NAME``_ir; NAME``_ho = NAME``_ov && NAME``_or; NAME``_hr = NAME``_rv && NAME``_rr; @(posedge clk);                                                                          \
      if (NAME``_hr) NAME``_nres++;                                                            \
      if (NAME``_ho) begin                                                        \
        void'(NAME``_wq.pop_front()); void'(NAME``_tq.pop_front());                            \
        if (RES_) begin void'(NAME``_rq.pop_front()); NAME``_nres--; end                       \
      end                                                                                      \
      if (NAME``_hi) begin                                                        \
        logic [WU_*COUT_*RW_-1:0] r;                                                           \
        for (int i = 0; i < WU_*COUT_*RW_; i++) r[i] = 1'($urandom);                           \
        NAME``_wq.push_back(NAME``_win);                                                       \
        NAME``_rq.push_back(RES_ ? r : '0);                                                    \
        NAME``_tq.push_back(cyc);                                                              \
      end                                                                                      \
    end                                                                                        \
  end

  `CONV_CASE(ua, 2, 3, 2, 1'b1, 4, 10, 32'h0002_0000)
  `CONV_CASE(ub, 5, 4, 1, 1'b0, 1, 0, 32'h0003_0000)

  initial begin
    free_run = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (400) @(posedge clk);
    free_run = 0;
    repeat (2000) @(posedge clk);
    // stop input, take everything: every accepted window must come out
    drain = 1;
    repeat (100) @(posedge clk);
    checks += 2;
    if (ua_wq.size() != 0 || ub_wq.size() != 0) begin
      failures++;
      $display("windows never produced: %0d %0d", ua_wq.size(), ub_wq.size());
    end
    if (res_waits == 0) failures++;
    if (out_stalls == 0) failures++;
    $display("residual_waits=%0d output_stalls=%0d", res_waits, out_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
