// tb_rinc1 -- random test of a RINC-1 subgroup (P trees boosted by one MAT LUT).
//
// P = 6: 36 inputs, so 4000 random input vectors are applied. The reference walks each
// of the six trees on its own slice of the inputs and takes the Adaboost vote of
// their outputs. Both subgroup output values must be seen.
module tb_rinc1;
  import poetbin_pkg::*;
  import poetbin_ref_pkg::*;

  localparam int unsigned P = 6;

  function automatic logic [P-1:0][2**P-1:0] mk_leaves();
    logic [P-1:0][2**P-1:0] r;
    for (int t = 0; t < P; t++) r[t] = {hash4(7, t, 1, 0), hash4(7, t, 2, 0)};
    return r;
  endfunction
  localparam logic [P-1:0][2**P-1:0] LV = mk_leaves();
  localparam logic [P-1:0][WW-1:0]   W  = {8'd40, 8'd90, 8'd17, 8'd66, 8'd130, 8'd25};
  localparam int unsigned            SW = 40 + 90 + 17 + 66 + 130 + 25;
  localparam logic [TW-1:0]          TH = TW'((SW + 1) / 2);

  int unsigned checks = 0, failures = 0, ones = 0, zeros = 0;
  logic clk = 1'b0;
  logic [P*P-1:0] in;
  logic out;

  rinc1 #(.P(P), .LEAVES(LV), .W(W), .TH(TH)) dut (.in(in), .out(out));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit dt[];
    int w[];
    bit x[];
    bit exp_out;
    for (int v = 0; v < 4000; v++) begin
      in = {$urandom(), $urandom()} >> (64 - P * P);
      @(posedge clk);
      dt = new[P];
      w = new[P];
      for (int t = 0; t < P; t++) begin
        x = new[P];
        for (int j = 0; j < P; j++) x[j] = in[t * P + j];
        dt[t] = ref_tree(MAX_LEAVES'(LV[t]), P, x);
        w[t] = int'(W[t]);
      end
      exp_out = ref_vote(w, dt);
      checks++;
      if (out) ones++; else zeros++;
      if (out !== exp_out) begin
        failures++;
        if (failures < 10) $display("FAIL in=%h out=%b exp=%b", in, out, exp_out);
      end
    end
    checks++;
    if (ones == 0 || zeros == 0) begin
      failures++;
      $display("FAIL: output never took both values (ones=%0d zeros=%0d)", ones, zeros);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
