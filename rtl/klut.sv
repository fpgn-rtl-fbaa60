// klut: one k-input LUT neuron.
//
// The output is the configuration bit INIT[idx(x)], where idx(x) = sum x[i]*2^i.
// This is the exact discrete form of the differentiable LUT the network is
// trained with: at binary inputs the relaxed LUT reduces to this lookup.
// K and INIT are parameters, as a LUT's configuration is fixed in the bitstream
// of the FPGA; the default INIT is the parity (XOR) of the K inputs. Purely combinational: the
// output follows x in the same cycle.
//
// Follows the network's k-LUT neuron (6 inputs on the target fabric). The
// address bit order and the parity default contents are this design's choices.
module klut #(
  parameter int unsigned K = 6,
  parameter logic [(1<<K)-1:0] INIT = (1<<K)'(64'h6996_9669_9669_6996)
) (
  input  logic [K-1:0] x,
  output logic         y
);
  initial assert (K >= 1 && K <= 6) else $error("klut: K must be 1..6");
  assign y = INIT[x];
endmodule
