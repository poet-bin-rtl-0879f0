// poetbin_pkg -- constants and the stand-in "trained model" shared by the PoET-BiN RTL.
//
// The classifier is a fixed network of small look-up tables. What the tables hold
// (which features every decision tree reads, the tree leaves, the boosting weights and
// thresholds, the output-layer weights) is the result of offline training and is
// fixed at elaboration time, exactly as generated HDL would hardcode it. No trained
// contents are published with the architecture, so this package supplies a
// deterministic pseudo-random model instead: every table entry is a hash of a model
// seed and the position of the entry in the network. Replace the model_* functions
// (or override the module parameters they feed) to load a real trained network; the
// datapath does not change.
//
// Shape constants follow the SVHN configuration of the architecture: 6-input LUTs
// (P = 6), RINC-2 modules of 6 subgroups of 6 trees (36 trees), 10 classes, an
// intermediate layer of 10 x 6 = 60 binary neurons, 512 binary input features and an
// 8-bit quantized output layer. Weight widths (WW, OW) and the model itself are this
// design's own choices.
package poetbin_pkg;

  // ---------------------------------------------------------------- network shape
  localparam int unsigned P_DEF     = 6;    // inputs per LUT
  localparam int unsigned NSUB_DEF  = 6;    // RINC-1 subgroups per RINC-2 module
  localparam int unsigned NC_DEF    = 10;   // classes = output neurons
  localparam int unsigned Q_DEF     = 8;    // output-layer quantization (bits)
  localparam int unsigned NFEAT_DEF = 512;  // binary features from the extractor

  // ---------------------------------------------------------------- number formats
  localparam int unsigned WW = 8;           // unsigned Adaboost (MAT) weight width
  localparam int unsigned TW = WW + 5;      // MAT threshold / sum width (up to 32 inputs)
  localparam int unsigned OW = 8;           // signed output-layer weight / bias width
  localparam int unsigned MAX_P = 10;       // widest LUT the model functions support
  localparam int unsigned MAX_LEAVES = 1 << MAX_P;

  localparam logic [31:0] MODEL_SEED_DEF = 32'h5EED_2019;
  localparam int unsigned MAT2_SUB = 255;  // subgroup index of a second-level MAT unit

  typedef logic [WW-1:0] mat_weight_t;
  typedef logic [TW-1:0] mat_sum_t;
  typedef logic signed [OW-1:0] out_weight_t;

  // ---------------------------------------------------------------- hashing
  // 32-bit integer mixer (multiply / xor-shift rounds); only used at elaboration.
  function automatic logic [31:0] hash4(input logic [31:0] a, input logic [31:0] b,
                                        input logic [31:0] c, input logic [31:0] d);
    logic [31:0] h;
    h = a ^ 32'h9E37_79B9;
    h = (h ^ b) * 32'h85EB_CA6B;  h = h ^ (h >> 13);
    h = (h ^ c) * 32'hC2B2_AE35;  h = h ^ (h >> 16);
    h = (h ^ d) * 32'h27D4_EB2F;  h = h ^ (h >> 15);
    h = h * 32'h1656_67B1;        h = h ^ (h >> 16);
    return h;
  endfunction

  // ---------------------------------------------------------------- stand-in model
  // Leaves of tree t of subgroup s of intermediate neuron n (bit a = leaf of address a).
  function automatic logic [MAX_LEAVES-1:0] model_dt_leaves(input logic [31:0] seed,
      input int unsigned n, input int unsigned s, input int unsigned t);
    logic [MAX_LEAVES-1:0] lv;
    for (int unsigned k = 0; k < MAX_LEAVES / 32; k++)
      lv[32*k +: 32] = hash4(seed, n, (s << 8) | t, 32'h100 + k);
    return lv;
  endfunction

  // Boosting weight of input i of the MAT unit of subgroup s of neuron n.
  // s == MAT2_SUB selects the second-level (across-subgroup) MAT unit. Range 1..255.
  function automatic mat_weight_t model_mat_weight(input logic [31:0] seed,
      input int unsigned n, input int unsigned s, input int unsigned i);
    logic [31:0] h;
    h = hash4(seed, n, (s << 8) | i, 32'h200);
    return mat_weight_t'(1 + (h % 255));
  endfunction

  // Feature feeding input m (m = tree * P + bit) of the RINC-2 module of neuron n.
  // An odd stride modulo a power-of-two NFEAT visits every feature once, so the
  // trees of one module never share a feature while NSUB*P*P <= NFEAT.
  function automatic int unsigned model_feature(input logic [31:0] seed,
      input int unsigned n, input int unsigned m, input int unsigned nfeat);
    logic [31:0] a, b;
    a = hash4(seed, n, 32'h300, 0) | 32'h1;
    b = hash4(seed, n, 32'h301, 0);
    return int'((64'(a) * 64'(m) + 64'(b)) % 64'(nfeat));
  endfunction

  // Output-layer weight of input j of output neuron c, range -128..127.
  function automatic out_weight_t model_out_weight(input logic [31:0] seed,
      input int unsigned c, input int unsigned j);
    logic [31:0] h;
    h = hash4(seed, c, j, 32'h400);
    return out_weight_t'(h[7:0]);
  endfunction

  // Output-layer bias of output neuron c, range -64..63.
  function automatic out_weight_t model_out_bias(input logic [31:0] seed, input int unsigned c);
    logic [31:0] h;
    h = hash4(seed, c, 32'h401, 32'h400);
    return out_weight_t'(int'(h[6:0]) - 64);
  endfunction

endpackage
