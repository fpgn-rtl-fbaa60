// tb_group_sum: 40 bits in 4 groups of 10 under random valid/ready; checks
// each class score against a direct count of its group, the output order,
// and the latency (3 cycles from acceptance with the output always taken).
//
// Stimulus, checks and counters are this testbench's own; expected values come
// from the network's definitions, computed independently of the RTL.
module tb_group_sum;
  localparam int N = 40, NCLS = 4, G = 10, SW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [N-1:0] in_vec;
  logic [NCLS*SW-1:0] scores;
  bit hs_in, hs_out;
  int checks = 0, failures = 0, cyc = 0;
  logic [NCLS*SW-1:0] q [$];
  int tq [$];

  group_sum #(.N(N), .NCLS(NCLS), .PC_PER(2)) dut (.*);

  always @(posedge clk) cyc++;

  task automatic run(int n, bit free_out);
    for (int t = 0; t < n; t++) begin
      @(negedge clk);
      in_valid  = $urandom % 3 != 0;
      out_ready = free_out || ($urandom % 3 != 0);
      in_vec    = N'({$urandom, $urandom});
      if (t % 37 == 0) in_vec = '1;
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (scores != q[0]) begin failures++; $display("got %0h exp %0h", scores, q[0]); end
        if (free_out) begin
          checks++;
          if (cyc - tq[0] != 3) begin failures++; $display("latency %0d", cyc - tq[0]); end
        end
      end
      hs_in = in_valid && in_ready;
      hs_out = out_valid && out_ready;
      @(posedge clk);
      if (hs_out) begin void'(q.pop_front()); void'(tq.pop_front()); end
      if (hs_in) begin
        logic [NCLS*SW-1:0] e;
        for (int j = 0; j < NCLS; j++) e[j*SW +: SW] = SW'($countones(in_vec[j*G +: G]));
        q.push_back(e);
        tq.push_back(cyc);
      end
    end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_vec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1000, 1'b1);
    run(1000, 1'b0);
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
