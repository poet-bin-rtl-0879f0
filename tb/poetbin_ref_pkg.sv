// poetbin_ref_pkg -- behavioural reference model used by the PoET-BiN testbenches.
//
// Written from the algorithmic description, not from the RTL: a decision tree is
// walked node by node from the root (heap numbering, 0-branch = left child), a boosted
// vote is evaluated in its Adaboost form sum(alpha_i * (2*b_i - 1)) >= 0, and an
// output neuron adds its integer weights and clamps the sum to Q signed bits. The
// network contents are read from the stand-in model of poetbin_pkg, as the RTL does.
// The model also counts events (votes of either value, saturations) so that the
// end-to-end tests can show that every mechanism was exercised.
package poetbin_ref_pkg;
  import poetbin_pkg::*;

  // event counters, cleared with ref_clear_stats()
  int unsigned st_mat1_one, st_mat1_zero;   // first-level (subgroup) votes
  int unsigned st_mat2_one, st_mat2_zero;   // second-level votes = intermediate neurons
  int unsigned st_sat_hi, st_sat_lo;        // output-layer saturation

  function automatic void ref_clear_stats();
    st_mat1_one = 0; st_mat1_zero = 0; st_mat2_one = 0; st_mat2_zero = 0;
    st_sat_hi = 0; st_sat_lo = 0;
  endfunction

  // Walk a level-wise tree: level j tests x[j]; leaves numbered left to right.
  function automatic bit ref_tree(input logic [MAX_LEAVES-1:0] leaves, input int p,
                                  input bit x[]);
    int node;      // heap index of the current node, root = 1
    node = 1;
    for (int j = 0; j < p; j++) node = 2 * node + (x[j] ? 1 : 0);
    return leaves[node - (1 << p)];
  endfunction

  // Adaboost vote with {0,1} classifier outputs mapped to {-1,+1}.
  function automatic bit ref_vote(input int w[], input bit b[]);
    int s;
    s = 0;
    foreach (w[i]) s += b[i] ? w[i] : -w[i];
    return s >= 0;
  endfunction

  // Q-bit signed saturating output neuron.
  function automatic int ref_score(input int w[], input int bias, input bit b[], input int q);
    int acc;
    acc = bias;
    foreach (w[i]) if (b[i]) acc += w[i];
    if (acc > (1 << (q - 1)) - 1) begin acc = (1 << (q - 1)) - 1; st_sat_hi++; end
    if (acc < -(1 << (q - 1)))    begin acc = -(1 << (q - 1));    st_sat_lo++; end
    return acc;
  endfunction

  // Intermediate neuron n of the model network.
  function automatic bit ref_neuron(input logic [31:0] seed, input int p, input int nsub,
                                    input int nfeat, input int n, input bit feat[]);
    bit sub[];
    int w2[];
    sub = new[nsub];
    w2  = new[nsub];
    for (int s = 0; s < nsub; s++) begin
      bit dt[];
      int w1[];
      dt = new[p];
      w1 = new[p];
      for (int t = 0; t < p; t++) begin
        bit x[];
        x = new[p];
        for (int j = 0; j < p; j++)
          x[j] = feat[model_feature(seed, n, (s * p + t) * p + j, nfeat)];
        dt[t] = ref_tree(model_dt_leaves(seed, n, s, t), p, x);
        w1[t] = int'(model_mat_weight(seed, n, s, t));
      end
      sub[s] = ref_vote(w1, dt);
      if (sub[s]) st_mat1_one++; else st_mat1_zero++;
      w2[s] = int'(model_mat_weight(seed, n, MAT2_SUB, s));
    end
    ref_neuron = ref_vote(w2, sub);
    if (ref_neuron) st_mat2_one++; else st_mat2_zero++;
  endfunction

  // Model key of MAT unit m of a full RINC-L (units numbered level by level from the
  // bottom): level-1 units share the subgroup keys of RINC-2, the top unit the
  // second-level key.
  function automatic int unsigned ref_l_key(input int p, input int levels, input int m);
    int nm;
    nm = (p ** levels - 1) / (p - 1);
    if (m < p ** (levels - 1)) return m;
    if (m == nm - 1) return MAT2_SUB;
    return 512 + m;
  endfunction

  // Intermediate neuron n built as a full RINC-L, evaluated one level at a time.
  function automatic bit ref_neuron_l(input logic [31:0] seed, input int p, input int levels,
                                      input int nfeat, input int n, input bit feat[]);
    bit cur[], nxt[];
    int m;
    cur = new[p ** levels];
    for (int t = 0; t < p ** levels; t++) begin
      bit x[];
      x = new[p];
      for (int j = 0; j < p; j++) x[j] = feat[model_feature(seed, n, t * p + j, nfeat)];
      cur[t] = ref_tree(model_dt_leaves(seed, n, t / p, t % p), p, x);
    end
    m = 0;
    for (int l = 1; l <= levels; l++) begin
      nxt = new[p ** (levels - l)];
      foreach (nxt[u]) begin
        int w[];
        bit b[];
        w = new[p];
        b = new[p];
        for (int i = 0; i < p; i++) begin
          w[i] = int'(model_mat_weight(seed, n, ref_l_key(p, levels, m), i));
          b[i] = cur[u * p + i];
        end
        nxt[u] = ref_vote(w, b);
        m++;
      end
      cur = nxt;
    end
    return cur[0];
  endfunction

  // Whole classifier: features -> intermediate neurons -> class scores.
  // levels = 2 builds each neuron as a RINC-2 of nsub subgroups, otherwise as a full
  // RINC-L.
  function automatic void ref_network(input logic [31:0] seed, input int p, input int nsub,
                                      input int nc, input int q, input int nfeat,
                                      input bit feat[], output int score[],
                                      input int levels = 2);
    bit inter[];
    inter = new[nc * p];
    score = new[nc];
    for (int n = 0; n < nc * p; n++)
      inter[n] = (levels == 2) ? ref_neuron(seed, p, nsub, nfeat, n, feat)
                               : ref_neuron_l(seed, p, levels, nfeat, n, feat);
    for (int c = 0; c < nc; c++) begin
      int w[];
      bit b[];
      w = new[p];
      b = new[p];
      for (int j = 0; j < p; j++) begin
        w[j] = int'($signed(model_out_weight(seed, c, j)));
        b[j] = inter[c * p + j];
      end
      score[c] = ref_score(w, int'($signed(model_out_bias(seed, c))), b, q);
    end
  endfunction
endpackage
