// tb_rinc_l -- test of the general L-level RINC (rinc_l) and of a layer built from it.
//
//   * rinc_l with P = 4 and L = 1, 2, 3 (4, 16 and 64 trees; 16, 64 and 256 inputs),
//     tb-chosen contents, random inputs, against a level-by-level reference walk;
//   * rinc_l with P = 6, L = 2 against rinc2 with NSUB = 6 given identical contents
//     (the two must be the same circuit);
//   * rinc_layer with LEVELS = 3 (P = 4, 8 neurons of 64 trees over 256 features)
//     against the reference model of the whole layer.
module tb_rinc_l;
  import poetbin_pkg::*;
  import poetbin_ref_pkg::*;

  localparam int unsigned P = 4;
  localparam int unsigned NT3 = 64, NM3 = 21;   // trees / MAT units of a P=4 RINC-3

  function automatic logic [NT3-1:0][2**P-1:0] mk_leaves();
    logic [NT3-1:0][2**P-1:0] r;
    for (int t = 0; t < NT3; t++) r[t] = 16'(hash4(23, t, 0, 0));
    return r;
  endfunction
  function automatic logic [NM3-1:0][P-1:0][WW-1:0] mk_w();
    logic [NM3-1:0][P-1:0][WW-1:0] r;
    for (int m = 0; m < NM3; m++)
      for (int i = 0; i < P; i++) r[m][i] = WW'(1 + hash4(29, m, i, 0) % 255);
    return r;
  endfunction
  function automatic logic [NM3-1:0][TW-1:0] mk_th();
    logic [NM3-1:0][TW-1:0] r;
    logic [NM3-1:0][P-1:0][WW-1:0] w;
    w = mk_w();
    for (int m = 0; m < NM3; m++) begin
      int s = 0;
      for (int i = 0; i < P; i++) s += int'(w[m][i]);
      r[m] = TW'((s + 1) / 2);
    end
    return r;
  endfunction

  localparam logic [NT3-1:0][2**P-1:0]      LV = mk_leaves();
  localparam logic [NM3-1:0][P-1:0][WW-1:0] W  = mk_w();
  localparam logic [NM3-1:0][TW-1:0]        TH = mk_th();

  int unsigned checks = 0, failures = 0;
  int unsigned ones[4], zeros[4];
  logic clk = 1'b0;
  logic [255:0] in;
  logic [3:1] out;

  // L = 1, 2, 3: the first trees / MAT units of the same content tables
  rinc_l #(.P(P), .L(1), .LEAVES(LV[3:0]),  .W(W[0:0]),  .TH(TH[0:0]))  dut1 (.in(in[15:0]),  .out(out[1]));
  rinc_l #(.P(P), .L(2), .LEAVES(LV[15:0]), .W(W[4:0]),  .TH(TH[4:0]))  dut2 (.in(in[63:0]),  .out(out[2]));
  rinc_l #(.P(P), .L(3), .LEAVES(LV),       .W(W),       .TH(TH))       dut3 (.in(in),         .out(out[3]));

  // RINC-L with L = 2 versus RINC-2 with all P subgroups, P = 6
  function automatic logic [5:0][5:0][63:0] mk_lv6();
    logic [5:0][5:0][63:0] r;
    for (int s = 0; s < 6; s++)
      for (int t = 0; t < 6; t++) r[s][t] = {hash4(31, s, t, 0), hash4(31, s, t, 1)};
    return r;
  endfunction
  function automatic logic [6:0][5:0][WW-1:0] mk_w6();
    logic [6:0][5:0][WW-1:0] r;
    for (int m = 0; m < 7; m++)
      for (int i = 0; i < 6; i++) r[m][i] = WW'(1 + hash4(37, m, i, 0) % 255);
    return r;
  endfunction
  localparam logic [5:0][5:0][63:0]     LV6 = mk_lv6();
  localparam logic [6:0][5:0][WW-1:0]   W6  = mk_w6();
  localparam logic [6:0][TW-1:0]        TH6 = {TW'(300), TW'(250), TW'(420), TW'(333), TW'(380), TW'(280), TW'(390)};

  logic [215:0] in6;
  logic o_l, o_2;
  rinc_l #(.P(6), .L(2), .LEAVES(LV6), .W(W6), .TH(TH6)) dut_l (.in(in6), .out(o_l));
  rinc2 #(.P(6), .NSUB(6), .LEAVES(LV6), .W1(W6[5:0]), .TH1(TH6[5:0]), .W2(W6[6]), .TH2(TH6[6]))
    dut_2 (.in(in6), .out(o_2));

  // a RINC-3 intermediate layer
  localparam int unsigned LNC = 2, LNF = 256;
  logic [LNF-1:0] feat;
  logic [LNC*P-1:0] inter;
  rinc_layer #(.P(P), .NSUB(P), .NC(LNC), .NFEAT(LNF), .LEVELS(3), .SEED(32'h0003_3333))
    dut_layer (.features(feat), .inter(inter));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: evaluate a full P-ary RINC-L with the tb's content tables
  function automatic bit ref_l(input int l, input bit x[]);
    bit cur[], nxt[];
    int m;
    cur = new[P ** l];
    foreach (cur[t]) begin
      bit xs[];
      xs = new[P];
      for (int j = 0; j < P; j++) xs[j] = x[t * P + j];
      cur[t] = ref_tree(MAX_LEAVES'(LV[t]), P, xs);
    end
    m = 0;
    for (int lv = 1; lv <= l; lv++) begin
      nxt = new[P ** (l - lv)];
      foreach (nxt[u]) begin
        int w[];
        bit b[];
        w = new[P];
        b = new[P];
        for (int i = 0; i < P; i++) begin w[i] = int'(W[m][i]); b[i] = cur[u * P + i]; end
        nxt[u] = ref_vote(w, b);
        m++;
      end
      cur = nxt;
    end
    return cur[0];
  endfunction

  initial begin
    bit x[];
    bit e;
    foreach (ones[i]) begin ones[i] = 0; zeros[i] = 0; end
    for (int v = 0; v < 2000; v++) begin
      for (int k = 0; k < 256; k++) in[k] = $urandom_range(0, 1) == 1;
      for (int k = 0; k < 216; k++) in6[k] = $urandom_range(0, 1) == 1;
      for (int k = 0; k < LNF; k++) feat[k] = $urandom_range(0, 1) == 1;
      @(posedge clk);
      x = new[256];
      foreach (x[k]) x[k] = in[k];
      for (int l = 1; l <= 3; l++) begin
        e = ref_l(l, x);
        checks++;
        if (out[l]) ones[l]++; else zeros[l]++;
        if (out[l] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL L=%0d vector %0d out=%b exp=%b", l, v, out[l], e);
        end
      end
      checks++;
      if (o_l !== o_2) begin
        failures++;
        if (failures < 10) $display("FAIL vector %0d rinc_l=%b rinc2=%b", v, o_l, o_2);
      end
      if (v < 200) begin
        x = new[LNF];
        foreach (x[k]) x[k] = feat[k];
        for (int n = 0; n < LNC * P; n++) begin
          e = ref_neuron_l(32'h0003_3333, P, 3, LNF, n, x);
          checks++;
          if (inter[n] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL layer vector %0d neuron %0d out=%b exp=%b", v, n, inter[n], e);
          end
        end
      end
    end
    for (int l = 1; l <= 3; l++) begin
      checks++;
      if (ones[l] == 0 || zeros[l] == 0) begin
        failures++;
        $display("FAIL: L=%0d output one-sided (%0d/%0d)", l, ones[l], zeros[l]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
