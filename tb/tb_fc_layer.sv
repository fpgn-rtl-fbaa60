// tb_fc_layer: a 40-input, 9-LUT FC layer (more pins than inputs, so the
// padded input is replicated) under random valid/ready; every output vector
// is checked against the reference LUT layer, in order, one cycle after it
// was accepted when the output is free.
//
// Stimulus, checks and counters are this testbench's own; expected values come
// from the network's definitions, computed independently of the RTL.
module tb_fc_layer;
  import fpgn_ref_pkg::*;
  localparam int M = 40, N = 9;
  localparam logic [31:0] SEED = 32'h0010_0007;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [M-1:0] in_vec;
  logic [N-1:0] out_vec;
  bit hs_in, hs_out;
  int checks = 0, failures = 0, stalls = 0;
  logic [N-1:0] q [$];

  fc_layer #(.M(M), .N(N), .K(6), .SEED(SEED)) dut (.*);

  initial begin
    in_valid = 0; out_ready = 0; in_vec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      in_valid  = $urandom % 4 != 0;
      out_ready = $urandom % 4 != 0;
      in_vec    = M'({$urandom, $urandom});
      #1;
      if (out_valid && !out_ready) stalls++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_vec != q[0]) begin failures++; $display("got %0h exp %0h", out_vec, q[0]); end
      end
      checks++;
      if (in_ready != (!out_valid || out_ready)) failures++;
      hs_in = in_valid && in_ready;
      hs_out = out_valid && out_ready;
      @(posedge clk);
      if (hs_out) void'(q.pop_front());
      if (hs_in) begin
        bits_t b, r;
        logic [N-1:0] e;
        b = new[M]; foreach (b[i]) b[i] = in_vec[i];
        r = ref_lut_layer(b, N, SEED, 6);
        foreach (r[i]) e[i] = r[i];
        q.push_back(e);
      end
    end
    checks++;
    if (stalls == 0) failures++;
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
