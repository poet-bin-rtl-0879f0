// rinc2 -- RINC-2: hierarchical Adaboost, NSUB RINC-1 subgroups boosted by a MAT LUT.
//
// Each subgroup s is a complete RINC-1 (P trees + MAT) reading in[s*P*P +: P*P]; its
// binary output is treated as one weak classifier of a second boosting level. The
// second-level MAT LUT weighs the NSUB subgroup outputs with W2 and compares with TH2.
// With NSUB = P this is the full two-level structure with P^2 trees, P^3 inputs and
// P^2 + P + 1 LUTs; fewer subgroups (NSUB < P) give the smaller modules used with
// 8-input LUTs (4 or 5 subgroups of 8 trees).
//
// Interface: in = NSUB*P*P binary features, out = the emulated binary neuron.
// Timing:    combinational, three LUT levels.
//
// Two levels are built because every configuration of the architecture uses two.
// Parameter layout (subgroup-major) is this design's choice.
module rinc2 import poetbin_pkg::*; #(
  parameter int unsigned P    = P_DEF,
  parameter int unsigned NSUB = NSUB_DEF,
  parameter logic [NSUB-1:0][P-1:0][2**P-1:0] LEAVES = {(NSUB*P*2**P/8){8'h96}},
  parameter logic [NSUB-1:0][P-1:0][WW-1:0]   W1     = {(NSUB*P){WW'(1)}},
  parameter logic [NSUB-1:0][TW-1:0]          TH1    = {NSUB{TW'((P + 1) / 2)}},
  parameter logic [NSUB-1:0][WW-1:0]          W2     = {NSUB{WW'(1)}},
  parameter logic [TW-1:0]                    TH2    = TW'((NSUB + 1) / 2)
) (
  input  logic [NSUB*P*P-1:0] in,
  output logic                out
);
  logic [NSUB-1:0] sub;  // subgroup (RINC-1) outputs

  for (genvar s = 0; s < NSUB; s++) begin : g_sub
    rinc1 #(.P(P), .LEAVES(LEAVES[s]), .W(W1[s]), .TH(TH1[s])) u_sub (
      .in(in[s*P*P +: P*P]), .out(sub[s]));
  end

  mat #(.N(NSUB), .W(W2), .TH(TH2)) u_mat (.b(sub), .out(out));

  initial assert (NSUB >= 1 && NSUB <= P) else $error("rinc2: NSUB must be in 1..P");
endmodule
