// tb_lut_vector: checks LUT-vector wiring and lookup.
// Case A is the 9-bit, 4-LUT example of locality-aware padding (LUT 1 takes
// bits 0-5, LUT 2 bits 6,7,8,6,7,8, LUTs 3 and 4 repeat them); case B a wider
// vector with more LUTs than unique inputs need; case C an exact fit.
//
// Stimulus, checks and counters are this testbench's own; expected values come
// from the network's definitions, computed independently of the RTL.
module tb_lut_vector;
  import fpgn_ref_pkg::*;
  localparam logic [31:0] SA = 32'h0000_0A01, SB = 32'h0000_0B02, SC = 32'h0000_0C03;
  logic [8:0]  xa; logic [3:0] ya;
  logic [19:0] xb; logic [6:0] yb;
  logic [23:0] xc; logic [3:0] yc;
  int checks = 0, failures = 0;

  lut_vector #(.M(9),  .N(4), .K(6), .SEED(SA)) ua (.x(xa), .y(ya));
  lut_vector #(.M(20), .N(7), .K(6), .SEED(SB)) ub (.x(xb), .y(yb));
  lut_vector #(.M(24), .N(4), .K(6), .SEED(SC)) uc (.x(xc), .y(yc));

  task automatic check_vec(bits_t x, logic [31:0] seed, int n, logic [63:0] y, string tag);
    bits_t r;
    r = ref_lut_layer(x, n, seed, 6);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (r[i] != y[i]) begin failures++; $display("%s LUT %0d got %0b exp %0b", tag, i, y[i], r[i]); end
    end
  endtask

  initial begin
    ints_t pins;
    int exp_fig [24] = '{0,1,2,3,4,5, 6,7,8,6,7,8, 0,1,2,3,4,5, 6,7,8,6,7,8};
    pins = ref_pins(9, 6, 4);
    for (int i = 0; i < 24; i++) begin
      checks++;
      if (pins[i] != exp_fig[i]) begin failures++; $display("pin map %0d = %0d", i, pins[i]); end
      // RTL map agrees with the explicit construction
      checks++;
      if (fpgn_pkg::pad_src(9, 6, i / 6, i % 6) != exp_fig[i]) failures++;
    end
    for (int t = 0; t < 300; t++) begin
      bits_t ba, bb, bc;
      xa = 9'($urandom); xb = 20'($urandom); xc = 24'($urandom);
      #1;
      ba = new[9];  foreach (ba[i]) ba[i] = xa[i];
      bb = new[20]; foreach (bb[i]) bb[i] = xb[i];
      bc = new[24]; foreach (bc[i]) bc[i] = xc[i];
      check_vec(ba, SA, 4, 64'(ya), "A");
      check_vec(bb, SB, 7, 64'(yb), "B");
      check_vec(bc, SC, 4, 64'(yc), "C");
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
