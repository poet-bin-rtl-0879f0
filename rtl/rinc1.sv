// rinc1 -- RINC-1 subgroup: P RINC-0 trees boosted by one MAT LUT.
//
// Tree i reads the P features in[i*P +: P] (feature j of tree i is in[i*P + j]), so a
// subgroup sees P*P distinct inputs. The P tree outputs form the address of the MAT
// LUT (tree i drives address bit i), which applies the Adaboost weights W[i] and the
// threshold TH. A RINC-1 costs P + 1 LUTs.
//
// Interface: in = P*P binary features, out = the subgroup's binary decision.
// Timing:    combinational, two LUT levels.
//
// The structure (P trees of P inputs, one MAT LUT) follows the architecture; the
// ordering of the inputs inside the in vector is this design's choice.
module rinc1 import poetbin_pkg::*; #(
  parameter int unsigned P = P_DEF,
  parameter logic [P-1:0][2**P-1:0] LEAVES = {(P*2**P/8){8'h96}},
  parameter logic [P-1:0][WW-1:0]   W      = {P{WW'(1)}},
  parameter logic [TW-1:0]          TH     = TW'((P + 1) / 2)
) (
  input  logic [P*P-1:0] in,
  output logic           out
);
  logic [P-1:0] dt;  // RINC-0 outputs

  for (genvar i = 0; i < P; i++) begin : g_dt
    rinc0 #(.P(P), .LEAVES(LEAVES[i])) u_dt (.in(in[i*P +: P]), .out(dt[i]));
  end

  mat #(.N(P), .W(W), .TH(TH)) u_mat (.b(dt), .out(out));
endmodule
