// tb_mat -- exhaustive test of the MAT (multiply-add-threshold) LUT.
//
// A 6-input unit with Adaboost-style weights and threshold ceil(sum/2), and a 4-input
// unit with an arbitrary threshold, are driven with every input combination. The
// first is checked against the signed Adaboost vote of the reference model, the
// second against a directly computed weighted sum >= threshold. Both output values
// must occur.
module tb_mat;
  import poetbin_pkg::*;
  import poetbin_ref_pkg::*;

  localparam logic [5:0][WW-1:0] W6 = {8'd200, 8'd13, 8'd77, 8'd5, 8'd120, 8'd64};
  localparam int unsigned SUM6 = 200 + 13 + 77 + 5 + 120 + 64;
  localparam logic [TW-1:0] TH6 = TW'((SUM6 + 1) / 2);
  localparam logic [3:0][WW-1:0] W4 = {8'd9, 8'd3, 8'd250, 8'd1};
  localparam logic [TW-1:0] TH4 = TW'(12);

  int unsigned checks = 0, failures = 0, ones = 0, zeros = 0;
  logic clk = 1'b0;
  logic [5:0] b6;
  logic [3:0] b4;
  logic out6, out4;

  mat #(.N(6), .W(W6), .TH(TH6)) dut6 (.b(b6), .out(out6));
  mat #(.N(4), .W(W4), .TH(TH4)) dut4 (.b(b4), .out(out4));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w[];
    bit bb[];
    int sum;
    for (int a = 0; a < 64; a++) begin
      b6 = 6'(a);
      #1;
      w = new[6];
      bb = new[6];
      foreach (w[i]) begin w[i] = int'(W6[i]); bb[i] = b6[i]; end
      checks++;
      if (out6) ones++; else zeros++;
      if (out6 !== ref_vote(w, bb)) begin
        failures++;
        $display("FAIL N=6 b=%b out=%b", b6, out6);
      end
    end
    for (int a = 0; a < 16; a++) begin
      b4 = 4'(a);
      #1;
      sum = 0;
      for (int i = 0; i < 4; i++) if (b4[i]) sum += int'(W4[i]);
      checks++;
      if (out4 !== (sum >= 12)) begin
        failures++;
        $display("FAIL N=4 b=%b out=%b", b4, out4);
      end
    end
    checks++;
    if (ones == 0 || zeros == 0) begin
      failures++;
      $display("FAIL: output never took both values");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
