// tb_rinc2 -- random test of RINC-2 (two-level hierarchical Adaboost).
//
// Two configurations: P = 6 with all 6 subgroups (216 inputs, the full P^3 structure)
// and P = 8 with 4 subgroups (256 inputs, 32 trees, as used with 8-input LUTs). Each
// gets 3000 random input vectors and is checked against the reference model's tree
// walks and two levels of Adaboost votes. Both output values must be seen in each.
module tb_rinc2;
  import poetbin_pkg::*;
  import poetbin_ref_pkg::*;

  localparam int unsigned PA = 6, SA = 6;
  localparam int unsigned PB = 8, SB = 4;

  function automatic logic [SA-1:0][PA-1:0][2**PA-1:0] lv_a();
    logic [SA-1:0][PA-1:0][2**PA-1:0] r;
    for (int s = 0; s < SA; s++)
      for (int t = 0; t < PA; t++) r[s][t] = {hash4(11, s, t, 0), hash4(11, s, t, 1)};
    return r;
  endfunction
  function automatic logic [SB-1:0][PB-1:0][2**PB-1:0] lv_b();
    logic [SB-1:0][PB-1:0][2**PB-1:0] r;
    for (int s = 0; s < SB; s++)
      for (int t = 0; t < PB; t++)
        for (int k = 0; k < 8; k++) r[s][t][32*k +: 32] = hash4(13, s, t, k);
    return r;
  endfunction
  function automatic logic [SA-1:0][PA-1:0][WW-1:0] w1_a();
    logic [SA-1:0][PA-1:0][WW-1:0] r;
    for (int s = 0; s < SA; s++)
      for (int t = 0; t < PA; t++) r[s][t] = WW'(1 + hash4(17, s, t, 0) % 255);
    return r;
  endfunction
  function automatic logic [SB-1:0][PB-1:0][WW-1:0] w1_b();
    logic [SB-1:0][PB-1:0][WW-1:0] r;
    for (int s = 0; s < SB; s++)
      for (int t = 0; t < PB; t++) r[s][t] = WW'(1 + hash4(19, s, t, 0) % 255);
    return r;
  endfunction

  localparam logic [SA-1:0][PA-1:0][2**PA-1:0] LVA = lv_a();
  localparam logic [SB-1:0][PB-1:0][2**PB-1:0] LVB = lv_b();
  localparam logic [SA-1:0][PA-1:0][WW-1:0]    W1A = w1_a();
  localparam logic [SB-1:0][PB-1:0][WW-1:0]    W1B = w1_b();
  localparam logic [SA-1:0][WW-1:0]            W2A = {8'd31, 8'd200, 8'd9, 8'd77, 8'd140, 8'd52};
  localparam logic [SB-1:0][WW-1:0]            W2B = {8'd100, 8'd60, 8'd45, 8'd80};

  // thresholds written out as ceil(sum/2), computed here from the weights
  function automatic logic [SA-1:0][TW-1:0] th1_a();
    logic [SA-1:0][TW-1:0] r;
    for (int s = 0; s < SA; s++) begin
      int sum = 0;
      for (int t = 0; t < PA; t++) sum += int'(W1A[s][t]);
      r[s] = TW'((sum + 1) / 2);
    end
    return r;
  endfunction
  function automatic logic [SB-1:0][TW-1:0] th1_b();
    logic [SB-1:0][TW-1:0] r;
    for (int s = 0; s < SB; s++) begin
      int sum = 0;
      for (int t = 0; t < PB; t++) sum += int'(W1B[s][t]);
      r[s] = TW'((sum + 1) / 2);
    end
    return r;
  endfunction

  int unsigned checks = 0, failures = 0;
  int unsigned ones_a = 0, zeros_a = 0, ones_b = 0, zeros_b = 0;
  logic clk = 1'b0;
  logic [SA*PA*PA-1:0] in_a;
  logic [SB*PB*PB-1:0] in_b;
  logic out_a, out_b;

  rinc2 #(.P(PA), .NSUB(SA), .LEAVES(LVA), .W1(W1A), .TH1(th1_a()), .W2(W2A),
          .TH2(TW'((31 + 200 + 9 + 77 + 140 + 52 + 1) / 2))) dut_a (.in(in_a), .out(out_a));
  rinc2 #(.P(PB), .NSUB(SB), .LEAVES(LVB), .W1(W1B), .TH1(th1_b()), .W2(W2B),
          .TH2(TW'((100 + 60 + 45 + 80 + 1) / 2))) dut_b (.in(in_b), .out(out_b));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit ref_rinc2(input int p, input int nsub, input bit feat[],
                                   input logic [MAX_LEAVES-1:0] lv[], input int w1[],
                                   input int w2[]);
    bit sub[];
    sub = new[nsub];
    for (int s = 0; s < nsub; s++) begin
      bit dt[];
      int w[];
      dt = new[p];
      w = new[p];
      for (int t = 0; t < p; t++) begin
        bit x[];
        x = new[p];
        for (int j = 0; j < p; j++) x[j] = feat[(s * p + t) * p + j];
        dt[t] = ref_tree(lv[s * p + t], p, x);
        w[t] = w1[s * p + t];
      end
      sub[s] = ref_vote(w, dt);
    end
    return ref_vote(w2, sub);
  endfunction

  initial begin
    bit f[];
    logic [MAX_LEAVES-1:0] lv[];
    int w1[], w2[];
    bit e;
    for (int v = 0; v < 3000; v++) begin
      for (int k = 0; k < SA * PA * PA; k++) in_a[k] = $urandom_range(0, 1) == 1;
      for (int k = 0; k < SB * PB * PB; k++) in_b[k] = $urandom_range(0, 1) == 1;
      @(posedge clk);
      // configuration A
      f = new[SA * PA * PA];
      foreach (f[k]) f[k] = in_a[k];
      lv = new[SA * PA];
      w1 = new[SA * PA];
      w2 = new[SA];
      for (int s = 0; s < SA; s++) begin
        w2[s] = int'(W2A[s]);
        for (int t = 0; t < PA; t++) begin
          lv[s * PA + t] = MAX_LEAVES'(LVA[s][t]);
          w1[s * PA + t] = int'(W1A[s][t]);
        end
      end
      e = ref_rinc2(PA, SA, f, lv, w1, w2);
      checks++;
      if (out_a) ones_a++; else zeros_a++;
      if (out_a !== e) begin
        failures++;
        if (failures < 10) $display("FAIL A vector %0d out=%b exp=%b", v, out_a, e);
      end
      // configuration B
      f = new[SB * PB * PB];
      foreach (f[k]) f[k] = in_b[k];
      lv = new[SB * PB];
      w1 = new[SB * PB];
      w2 = new[SB];
      for (int s = 0; s < SB; s++) begin
        w2[s] = int'(W2B[s]);
        for (int t = 0; t < PB; t++) begin
          lv[s * PB + t] = MAX_LEAVES'(LVB[s][t]);
          w1[s * PB + t] = int'(W1B[s][t]);
        end
      end
      e = ref_rinc2(PB, SB, f, lv, w1, w2);
      checks++;
      if (out_b) ones_b++; else zeros_b++;
      if (out_b !== e) begin
        failures++;
        if (failures < 10) $display("FAIL B vector %0d out=%b exp=%b", v, out_b, e);
      end
    end
    checks++;
    if (ones_a == 0 || zeros_a == 0 || ones_b == 0 || zeros_b == 0) begin
      failures++;
      $display("FAIL: an output never took both values (%0d %0d %0d %0d)",
               ones_a, zeros_a, ones_b, zeros_b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
