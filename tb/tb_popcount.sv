// tb_popcount: random vectors with random enable on a 37-bit popcount with a
// register every 2 adder levels (latency 3) and a 7-bit one with a register
// every level (latency 3). The expected value is pushed through a model delay
// line that advances with en, so both the count and the latency are checked.
//
// Stimulus, checks and counters are this testbench's own; expected values come
// from the network's definitions, computed independently of the RTL.
module tb_popcount;
  logic clk = 0;
  always #5 clk = ~clk;
  logic        en;
  logic [36:0] xa; logic [5:0] ya;
  logic [6:0]  xb; logic [2:0] yb;
  int checks = 0, failures = 0;

  popcount #(.N(37), .PER(2)) ua (.clk, .en, .x(xa), .y(ya));
  popcount #(.N(7),  .PER(1)) ub (.clk, .en, .x(xb), .y(yb));

  localparam int LA = fpgn_pkg::pc_latency(37, 2);
  localparam int LB = fpgn_pkg::pc_latency(7, 1);
  int qa [$], qb [$];

  initial begin
    if (LA != 3 || LB != 3) begin failures++; $display("latency formula %0d %0d", LA, LB); end
    checks++;
    en = 0; xa = '0; xb = '0;
    for (int i = 0; i < LA; i++) qa.push_back(-1);
    for (int i = 0; i < LB; i++) qb.push_back(-1);
    repeat (2) @(posedge clk);
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      en = ($urandom % 4) != 0;
      xa = 37'({$urandom, $urandom});
      if (t % 50 == 0) xa = '1;
      xb = 7'($urandom);
      if (en) begin
        qa.push_back($countones(xa));
        qb.push_back($countones(xb));
        void'(qa.pop_front());
        void'(qb.pop_front());
      end
      @(posedge clk);
      #1;
      if (en) begin
        if (qa[0] >= 0) begin checks++; if (int'(ya) != qa[0]) begin failures++; $display("A got %0d exp %0d", ya, qa[0]); end end
        if (qb[0] >= 0) begin checks++; if (int'(yb) != qb[0]) begin failures++; $display("B got %0d exp %0d", yb, qb[0]); end end
      end
    end
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
