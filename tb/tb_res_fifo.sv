// tb_res_fifo: random pushes and pops against a queue model; checks order,
// that in_ready falls exactly when DEPTH words are held and out_valid exactly
// when none is, and that both full and empty were reached.
//
// Stimulus, checks and counters are this testbench's own; expected values come
// from the network's definitions, computed independently of the RTL.
module tb_res_fifo;
  localparam int W = 13, DEPTH = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  bit hs_in, hs_out;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [W-1:0] q [$];

  res_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // bursts that fill and drain the FIFO
      in_valid  = ((t / 200) % 2 == 0) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      out_ready = ((t / 200) % 2 == 0) ? ($urandom % 4 == 0) : ($urandom % 4 != 0);
      in_data   = W'($urandom);
      #1;
      checks += 2;
      if (in_ready != (q.size() < DEPTH)) begin failures++; $display("in_ready %0b size %0d", in_ready, q.size()); end
      if (out_valid != (q.size() > 0)) begin failures++; $display("out_valid %0b size %0d", out_valid, q.size()); end
      if (q.size() == DEPTH) n_full++;
      if (q.size() == 0) n_empty++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != q[0]) begin failures++; $display("data %0h exp %0h", out_data, q[0]); end
      end
      hs_in = in_valid && in_ready;
      hs_out = out_valid && out_ready;
      @(posedge clk);
      if (hs_out) void'(q.pop_front());
      if (hs_in) q.push_back(in_data);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("full %0d empty %0d", n_full, n_empty); end
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
