// rinc_layer -- the intermediate layer: one RINC-2 (or RINC-L) module per binary neuron.
//
// The classifier's hidden layers are replaced by an intermediate layer of NC*P binary
// neurons (NC classes times P), and each of those neurons is emulated by its own RINC-2
// module trained to reproduce it. Module n reads NSUB*P*P of the NFEAT binary
// features; which ones is decided by training and is pure wiring here (input m of
// module n is features[model_feature(SEED, n, m, NFEAT)]). The tree leaves, the
// boosting weights and thresholds of module n are likewise elaboration-time constants
// taken from the model in poetbin_pkg; each MAT threshold is half the total weight of
// its inputs (rounded up), the Adaboost majority rule.
//
// With LEVELS != 2 each neuron is a full RINC-L (rinc_l, P^LEVELS trees) instead;
// when such a module has more inputs than there are features, the model's taps wrap
// around and features are shared.
//
// Interface: features = NFEAT binary features; inter[n] = intermediate neuron n.
// Timing:    combinational, LEVELS + 1 LUT levels.
//
// Layer size NC*P, the RINC-2 per neuron and the distinct-feature wiring follow the
// architecture; the model contents are stand-ins (see poetbin_pkg).
module rinc_layer import poetbin_pkg::*; #(
  parameter int unsigned P     = P_DEF,
  parameter int unsigned NSUB  = NSUB_DEF,
  parameter int unsigned NC    = NC_DEF,
  parameter int unsigned NFEAT = NFEAT_DEF,
  parameter int unsigned LEVELS = 2,
  parameter logic [31:0] SEED  = MODEL_SEED_DEF
) (
  input  logic [NFEAT-1:0] features,
  output logic [NC*P-1:0]  inter
);
  localparam int unsigned NI  = NC * P;         // intermediate neurons
  // inputs of one module: RINC-2 with NSUB subgroups, or a full RINC-L
  localparam int unsigned NIN = (LEVELS == 2) ? NSUB * P * P : P**(LEVELS + 1);
  localparam int unsigned NT  = P**LEVELS;                 // trees of a full RINC-L
  localparam int unsigned NM  = (P**LEVELS - 1) / (P - 1); // MAT units of a full RINC-L

  typedef logic [NSUB-1:0][P-1:0][2**P-1:0] leaves_t;
  typedef logic [NSUB-1:0][P-1:0][WW-1:0]   w1_t;
  typedef logic [NSUB-1:0][TW-1:0]          th1_t;
  typedef logic [NSUB-1:0][WW-1:0]          w2_t;

  function automatic leaves_t f_leaves(input int unsigned n);
    leaves_t r;
    logic [MAX_LEAVES-1:0] lv;
    for (int unsigned s = 0; s < NSUB; s++)
      for (int unsigned t = 0; t < P; t++) begin
        lv = model_dt_leaves(SEED, n, s, t);
        r[s][t] = lv[2**P-1:0];
      end
    return r;
  endfunction

  function automatic w1_t f_w1(input int unsigned n);
    w1_t r;
    for (int unsigned s = 0; s < NSUB; s++)
      for (int unsigned i = 0; i < P; i++)
        r[s][i] = model_mat_weight(SEED, n, s, i);
    return r;
  endfunction

  function automatic th1_t f_th1(input int unsigned n);
    th1_t r;
    int unsigned sum;
    for (int unsigned s = 0; s < NSUB; s++) begin
      sum = 0;
      for (int unsigned i = 0; i < P; i++)
        sum += int'(model_mat_weight(SEED, n, s, i));
      r[s] = TW'((sum + 1) / 2);
    end
    return r;
  endfunction

  function automatic w2_t f_w2(input int unsigned n);
    w2_t r;
    for (int unsigned s = 0; s < NSUB; s++)
      r[s] = model_mat_weight(SEED, n, MAT2_SUB, s);
    return r;
  endfunction

  function automatic logic [TW-1:0] f_th2(input int unsigned n);
    int unsigned sum;
    sum = 0;
    for (int unsigned s = 0; s < NSUB; s++)
      sum += int'(model_mat_weight(SEED, n, MAT2_SUB, s));
    return TW'((sum + 1) / 2);
  endfunction

  // ---- contents of a full RINC-L (LEVELS != 2), same model keys as RINC-2 for L = 2:
  // tree t is tree t%P of level-1 unit t/P; level-1 MAT unit u uses subgroup key u,
  // the top unit the second-level key, units of the levels in between key 512 + m.
  typedef logic [NT-1:0][2**P-1:0] lleaves_t;
  typedef logic [NM-1:0][P-1:0][WW-1:0] lw_t;
  typedef logic [NM-1:0][TW-1:0] lth_t;

  function automatic int unsigned l_key(input int unsigned m);
    if (m < P**(LEVELS-1)) return m;
    if (m == NM - 1)       return MAT2_SUB;
    return 512 + m;
  endfunction

  function automatic lleaves_t f_lleaves(input int unsigned n);
    lleaves_t r;
    logic [MAX_LEAVES-1:0] lv;
    for (int unsigned t = 0; t < NT; t++) begin
      lv = model_dt_leaves(SEED, n, t / P, t % P);
      r[t] = lv[2**P-1:0];
    end
    return r;
  endfunction

  function automatic lw_t f_lw(input int unsigned n);
    lw_t r;
    for (int unsigned m = 0; m < NM; m++)
      for (int unsigned i = 0; i < P; i++) r[m][i] = model_mat_weight(SEED, n, l_key(m), i);
    return r;
  endfunction

  function automatic lth_t f_lth(input int unsigned n);
    lth_t r;
    int unsigned sum;
    for (int unsigned m = 0; m < NM; m++) begin
      sum = 0;
      for (int unsigned i = 0; i < P; i++) sum += int'(model_mat_weight(SEED, n, l_key(m), i));
      r[m] = TW'((sum + 1) / 2);
    end
    return r;
  endfunction

  for (genvar n = 0; n < NI; n++) begin : g_neuron
    logic [NIN-1:0] sel;  // features routed to this module

    for (genvar m = 0; m < NIN; m++) begin : g_wire
      localparam int unsigned F = model_feature(SEED, n, m, NFEAT);
      assign sel[m] = features[F];
    end

    if (LEVELS == 2) begin : g_l2
      rinc2 #(
        .P(P), .NSUB(NSUB),
        .LEAVES(f_leaves(n)), .W1(f_w1(n)), .TH1(f_th1(n)),
        .W2(f_w2(n)), .TH2(f_th2(n))
      ) u_rinc2 (.in(sel), .out(inter[n]));
    end else begin : g_ll
      rinc_l #(.P(P), .L(LEVELS), .LEAVES(f_lleaves(n)), .W(f_lw(n)), .TH(f_lth(n))) u_rincl (
        .in(sel), .out(inter[n]));
    end
  end

  initial assert (LEVELS >= 1) else $error("rinc_layer: LEVELS must be at least 1");
endmodule
