// tb_klut: checks a 6-input and a 4-input LUT exhaustively against the
// product form of the LUT equation, sum_u w[u] * prod_i x_i^u_i (1-x_i)^(1-u_i).
//
// Stimulus, checks and counters are this testbench's own; expected values come
// from the network's definitions, computed independently of the RTL.
module tb_klut;
  localparam logic [63:0] INIT6 = 64'hC3A5_0F96_1E2D_B487;
  localparam logic [15:0] INIT4 = 16'hB00C;
  logic [5:0] x6;
  logic [3:0] x4;
  logic       y6, y4;
  int checks = 0, failures = 0;

  klut #(.K(6), .INIT(INIT6)) u6 (.x(x6), .y(y6));
  klut #(.K(4), .INIT(INIT4)) u4 (.x(x4), .y(y4));

  function automatic int prod_form(int k, logic [63:0] w, int x);
    int s;
    s = 0;
    for (int u = 0; u < (1 << k); u++) begin
      int d;
      d = 1;
      for (int i = 0; i < k; i++) d *= ((u >> i) & 1) ? ((x >> i) & 1) : 1 - ((x >> i) & 1);
      s += int'(w[u]) * d;
    end
    return s;
  endfunction

  initial begin
    for (int x = 0; x < 64; x++) begin
      x6 = 6'(x);
      #1;
      checks++;
      if (int'(y6) != prod_form(6, INIT6, x)) begin failures++; $display("K6 x=%0d y=%0b", x, y6); end
    end
    for (int x = 0; x < 16; x++) begin
      x4 = 4'(x);
      #1;
      checks++;
      if (int'(y4) != prod_form(4, 64'(INIT4), x)) begin failures++; $display("K4 x=%0d y=%0b", x, y4); end
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
