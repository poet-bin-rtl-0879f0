// output_layer -- sparsely connected output layer: NC neurons of P inputs each.
//
// Output neuron c is connected only to the group of P intermediate neurons
// inter[c*P +: P] and produces the Q-bit score of class c (see output_neuron). Its
// weights and bias come from the model in poetbin_pkg. The whole layer costs Q*NC
// LUTs.
//
// Interface: inter = NC*P intermediate neurons; scores[c] = signed Q-bit class score.
// Timing:    purely combinational, one LUT deep.
//
// Connectivity of P inputs per output neuron follows the architecture; assigning
// consecutive groups of intermediate neurons to consecutive classes is this design's
// choice.
module output_layer import poetbin_pkg::*; #(
  parameter int unsigned P    = P_DEF,
  parameter int unsigned NC   = NC_DEF,
  parameter int unsigned Q    = Q_DEF,
  parameter logic [31:0] SEED = MODEL_SEED_DEF
) (
  input  logic [NC*P-1:0]      inter,
  output logic [NC-1:0][Q-1:0] scores
);
  typedef logic [P-1:0][OW-1:0] ow_t;

  function automatic ow_t f_w(input int unsigned c);
    ow_t r;
    for (int unsigned j = 0; j < P; j++) r[j] = model_out_weight(SEED, c, j);
    return r;
  endfunction

  for (genvar c = 0; c < NC; c++) begin : g_class
    output_neuron #(.P(P), .Q(Q), .W(f_w(c)), .BIAS(model_out_bias(SEED, c))) u_neuron (
      .in(inter[c*P +: P]), .score(scores[c]));
  end
endmodule
