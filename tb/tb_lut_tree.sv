// tb_lut_tree: checks LUT-trees of 8 inputs (2 levels), 36 inputs (2 levels,
// full first level) and 40 inputs (3 levels) against a level-by-level
// reference, exhaustively for the 8-input tree.
//
// Stimulus, checks and counters are this testbench's own; expected values come
// from the network's definitions, computed independently of the RTL.
module tb_lut_tree;
  import fpgn_ref_pkg::*;
  localparam logic [31:0] S8 = 32'h0003_0001, S36 = 32'h0003_0002, S40 = 32'h0003_0003;
  logic [7:0]  x8;  logic y8;
  logic [35:0] x36; logic y36;
  logic [39:0] x40; logic y40;
  int checks = 0, failures = 0;

  lut_tree #(.N_I(8),  .K(6), .SEED(S8))  u8  (.x(x8),  .y(y8));
  lut_tree #(.N_I(36), .K(6), .SEED(S36)) u36 (.x(x36), .y(y36));
  lut_tree #(.N_I(40), .K(6), .SEED(S40)) u40 (.x(x40), .y(y40));

  initial begin
    checks++;
    if (fpgn_pkg::tree_levels(8, 6) != 2 || fpgn_pkg::tree_levels(40, 6) != 3) failures++;
    for (int v = 0; v < 256; v++) begin
      bits_t b;
      x8 = 8'(v);
      #1;
      b = new[8]; foreach (b[i]) b[i] = x8[i];
      checks++;
      if (y8 != ref_tree(b, S8, 6)) begin failures++; $display("N8 x=%0h", x8); end
    end
    for (int t = 0; t < 400; t++) begin
      bits_t b, c;
      x36 = 36'({$urandom, $urandom}); x40 = 40'({$urandom, $urandom});
      #1;
      b = new[36]; foreach (b[i]) b[i] = x36[i];
      c = new[40]; foreach (c[i]) c[i] = x40[i];
      checks += 2;
      if (y36 != ref_tree(b, S36, 6)) begin failures++; $display("N36 x=%0h", x36); end
      if (y40 != ref_tree(c, S40, 6)) begin failures++; $display("N40 x=%0h", x40); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
