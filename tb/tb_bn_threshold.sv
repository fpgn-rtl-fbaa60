// tb_bn_threshold: random integer sums against the per-channel fused
// threshold, including the values just below, at and above each threshold.
//
// Stimulus, checks and counters are this testbench's own; expected values come
// from the network's definitions, computed independently of the RTL.
module tb_bn_threshold;
  localparam int C = 12, XW = 7, MAXV = 90;
  localparam logic [31:0] SEED = 32'h0000_BEEF;
  logic [C*XW-1:0] x;
  logic [C-1:0]    y;
  int checks = 0, failures = 0;

  bn_threshold #(.C(C), .XW(XW), .MAXV(MAXV), .SEED(SEED)) dut (.x, .y);

  task automatic check();
    #1;
    for (int c = 0; c < C; c++) begin
      int t, v;
      t = fpgn_pkg::bn_thresh(SEED, c, MAXV);
      v = int'(x[c*XW +: XW]);
      checks++;
      if (y[c] != (v >= t)) begin failures++; $display("ch %0d v=%0d t=%0d y=%0b", c, v, t, y[c]); end
    end
  endtask

  initial begin
    // thresholds lie within -4..+3 of MAXV/2
    for (int c = 0; c < C; c++) begin
      int t;
      t = fpgn_pkg::bn_thresh(SEED, c, MAXV);
      checks++;
      if (t < MAXV / 2 - 4 || t > MAXV / 2 + 3) failures++;
    end
    for (int d = -1; d <= 1; d++) begin
      for (int c = 0; c < C; c++) x[c*XW +: XW] = XW'(fpgn_pkg::bn_thresh(SEED, c, MAXV) + d);
      check();
    end
    for (int t = 0; t < 500; t++) begin
      for (int c = 0; c < C; c++) x[c*XW +: XW] = XW'($urandom % (MAXV + 1));
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
