// output_neuron -- one neuron of the sparsely connected output layer, as Q LUTs.
//
// The neuron reads only P binary intermediate neurons, so its whole transfer function
// (weighted sum of the P bits plus bias, quantized to Q bits) has just 2^P possible
// results. They are computed at elaboration time; bit k of the result is then a
// single P-input LUT, and the neuron costs Q LUTs with no arithmetic in hardware.
//
// Interface: in[j] = j-th intermediate neuron of this group; score = Q-bit signed
//            (two's complement) activation, the class score.
// Timing:    purely combinational, one LUT deep.
//
// Sparse P-input connectivity and Q-bit quantization as Q LUTs follow the
// architecture. The number format is this design's choice: integer OW-bit signed
// weights and bias on the output scale, and saturation of the sum to the Q-bit range.
module output_neuron import poetbin_pkg::*; #(
  parameter int unsigned P = P_DEF,
  parameter int unsigned Q = Q_DEF,
  parameter logic [P-1:0][OW-1:0] W    = {P{OW'(1)}},
  parameter logic [OW-1:0]        BIAS = '0
) (
  input  logic [P-1:0] in,
  output logic [Q-1:0] score
);
  // Q truth tables of 2^P bits: LUTS[k][a] is bit k of the score for input pattern a.
  function automatic logic [Q-1:0][2**P-1:0] luts();
    logic [Q-1:0][2**P-1:0] t;
    int acc;
    for (int unsigned a = 0; a < 2**P; a++) begin
      acc = int'($signed(BIAS));
      for (int unsigned j = 0; j < P; j++)
        if (a[j]) acc += int'($signed(W[j]));
      if (acc >  (2**(Q-1) - 1)) acc =  2**(Q-1) - 1;
      if (acc < -(2**(Q-1)))     acc = -(2**(Q-1));
      for (int unsigned k = 0; k < Q; k++)
        t[k][a] = acc[k];
    end
    return t;
  endfunction

  localparam logic [Q-1:0][2**P-1:0] LUTS = luts();

  for (genvar k = 0; k < Q; k++) begin : g_bit
    assign score[k] = LUTS[k][in];
  end

  initial assert (Q >= 2 && Q <= 31) else $error("output_neuron: Q must be in 2..31");
endmodule
