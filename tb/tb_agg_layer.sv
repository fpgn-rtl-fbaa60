// tb_agg_layer: two pixels per beat, three colours, three aggregation channels
// per colour. Every output bit is checked against a reference LUT-tree over
// its colour's 8 bits; also checks the one-cycle latency and stalls.
//
// Stimulus, checks and counters are this testbench's own; expected values come
// from the network's definitions, computed independently of the RTL.
module tb_agg_layer;
  import fpgn_ref_pkg::*;
  localparam int AW = 2, NCOL = 3, PB = 8, NA = 3;
  localparam logic [31:0] SEED = 32'h0001_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [AW*NCOL*PB-1:0] in_pix;
  logic [AW*NCOL*NA-1:0] out_bits;
  bit hs_in, hs_out;
  int checks = 0, failures = 0, stalls = 0, cyc = 0;
  logic [AW*NCOL*NA-1:0] q [$];
  int tq [$];

  agg_layer #(.AW(AW), .NCOL(NCOL), .PB(PB), .NA(NA), .SEED(SEED)) dut (.*);
  always @(posedge clk) cyc++;

  initial begin
    in_valid = 0; out_ready = 0; in_pix = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      in_valid  = $urandom % 4 != 0;
      out_ready = (t < 500) || ($urandom % 3 != 0);
      in_pix    = (AW*NCOL*PB)'({$urandom, $urandom});
      #1;
      if (out_valid && !out_ready) stalls++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_bits != q[0]) begin failures++; $display("got %0h exp %0h", out_bits, q[0]); end
        if (t < 500) begin checks++; if (cyc - tq[0] != 1) failures++; end
      end
      hs_in = in_valid && in_ready;
      hs_out = out_valid && out_ready;
      @(posedge clk);
      if (hs_out) begin void'(q.pop_front()); void'(tq.pop_front()); end
      if (hs_in) begin
        logic [AW*NCOL*NA-1:0] e;
        for (int a = 0; a < AW; a++)
          for (int c = 0; c < NCOL; c++) begin
            bits_t b;
            b = new[PB];
            foreach (b[i]) b[i] = in_pix[(a*NCOL+c)*PB + i];
            for (int j = 0; j < NA; j++) e[(a*NCOL+c)*NA + j] = ref_tree(b, SEED + 32'(c*NA + j), 6);
          end
        q.push_back(e);
        tq.push_back(cyc);
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
