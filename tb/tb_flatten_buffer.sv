// tb_flatten_buffer: streams maps of 6 pixels (4 bits each, 2 per beat) with
// random valid and random ready; checks the in-order layout of every
// collected map, that input is refused while a full map waits, and that a
// map appears one cycle after its last beat.
//
// Stimulus, checks and counters are this testbench's own; expected values come
// from the network's definitions, computed independently of the RTL.
module tb_flatten_buffer;
  localparam int C = 4, NPIX = 6, PW = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [PW*C-1:0] in_data;
  logic [NPIX*C-1:0] out_vec;
  bit hs_in, hs_out;
  int checks = 0, failures = 0, maps = 0, blocked = 0;
  logic [C-1:0] pix [$];
  int last_beat_cycle = -10, cyc = 0;

  flatten_buffer #(.C(C), .NPIX(NPIX), .PW(PW)) dut (.*);

  always @(posedge clk) cyc++;

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (maps < 40) begin
      @(negedge clk);
      in_valid  = $urandom % 3 != 0;
      out_ready = $urandom % 3 != 0;
      in_data   = PW*C'($urandom);
      #1;
      if (out_valid && in_ready) begin failures++; $display("accepts while full"); end
      if (out_valid && in_valid) blocked++;
      if (out_valid && out_ready) begin
        checks++;
        for (int p = 0; p < NPIX; p++) begin
          checks++;
          if (out_vec[p*C +: C] != pix[p]) begin failures++; $display("map %0d pixel %0d", maps, p); end
        end
        if (last_beat_cycle + 1 > cyc) failures++;
        repeat (NPIX) void'(pix.pop_front());
        maps++;
      end
      if (!out_valid && pix.size() >= NPIX) begin failures++; $display("map not presented"); end
      hs_in = in_valid && in_ready;
      hs_out = out_valid && out_ready;
      @(posedge clk);
      if (hs_in) begin
        for (int p = 0; p < PW; p++) pix.push_back(in_data[p*C +: C]);
        if (pix.size() == NPIX) last_beat_cycle = cyc;
      end
    end
    checks++;
    if (blocked == 0) begin failures++; $display("back-pressure never seen"); end
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
