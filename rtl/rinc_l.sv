// rinc_l -- RINC-L: L levels of hierarchical Adaboost over P-input decision trees.
//
// A RINC-1 is P RINC-0 trees whose outputs are combined by one MAT LUT; a RINC-L is P
// RINC-(L-1) modules combined by one more MAT LUT. Unrolled, the module is a complete
// P-ary tree of LUTs: P^L decision trees at the bottom (level 0), then P^(L-1) MAT
// units at level 1, P^(L-2) at level 2, and a single MAT unit at level L whose output
// is the module output. It has P^(L+1) inputs, (P^(L+1) - 1)/(P - 1) LUTs and L+1 LUT
// levels of delay.
//
// Parameter layout (this design's choice):
//   LEAVES[t]   leaves of tree t, trees numbered left to right; tree t reads
//               in[t*P +: P];
//   W[m], TH[m] MAT units numbered level by level from the bottom: level-1 units
//               first (unit u combines trees u*P ... u*P+P-1), then level 2, and so on;
//               the last one (m = NM-1) is the top unit.
// Interface: in = P^(L+1) binary features, out = the boosted binary decision.
// Timing:    purely combinational.
//
// The level structure follows the architecture's RINC-L definition. For L = 2 and a
// top level with fewer than P subgroups use rinc2 (NSUB < P) instead.
module rinc_l import poetbin_pkg::*; #(
  parameter int unsigned P = P_DEF,
  parameter int unsigned L = 2,
  parameter logic [P**L-1:0][2**P-1:0]                LEAVES = {(P**L*2**P/8){8'h96}},
  parameter logic [(P**L-1)/(P-1)-1:0][P-1:0][WW-1:0] W      = {((P**L-1)/(P-1)*P){WW'(1)}},
  parameter logic [(P**L-1)/(P-1)-1:0][TW-1:0]        TH     = {((P**L-1)/(P-1)){TW'((P + 1) / 2)}}
) (
  input  logic [P**(L+1)-1:0] in,
  output logic                out
);
  localparam int unsigned NT = P**L;  // trees

  // index of the first MAT unit of level l (1..L)
  function automatic int unsigned mat_base(input int unsigned l);
    int unsigned b;
    b = 0;
    for (int unsigned j = 1; j < l; j++) b += P**(L-j);
    return b;
  endfunction

  // lvl[l][u]: output of unit u of level l (level 0 = trees); upper bits unused above level 0
  logic [L:0][NT-1:0] lvl;

  for (genvar t = 0; t < NT; t++) begin : g_dt
    rinc0 #(.P(P), .LEAVES(LEAVES[t])) u_dt (.in(in[t*P +: P]), .out(lvl[0][t]));
  end

  for (genvar l = 1; l <= L; l++) begin : g_level
    for (genvar u = 0; u < P**(L-l); u++) begin : g_unit
      localparam int unsigned M = mat_base(l) + u;
      mat #(.N(P), .W(W[M]), .TH(TH[M])) u_mat (.b(lvl[l-1][u*P +: P]), .out(lvl[l][u]));
    end
    if (P**(L-l) < NT) begin : g_pad
      assign lvl[l][NT-1:P**(L-l)] = '0;  // positions with no unit at this level
    end
  end

  assign out = lvl[L][0];

  initial assert (L >= 1) else $error("rinc_l: L must be at least 1 (RINC-0 is rinc0)");
endmodule
