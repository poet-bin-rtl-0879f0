// tb_poetbin_classifier -- single-cycle classifier test at the default size.
//
// Feature vectors are presented with in_valid on consecutive cycles (one inference
// per clock, plus some gaps). Every inference must answer exactly one cycle later
// with out_valid and the class scores of the reference model; out_valid must stay
// low when nothing was presented and after reset.
module tb_poetbin_classifier;
  import poetbin_pkg::*;
  import poetbin_ref_pkg::*;

  localparam int unsigned P = P_DEF, NSUB = NSUB_DEF, NC = NC_DEF, Q = Q_DEF, NFEAT = NFEAT_DEF;

  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [NFEAT-1:0] features;
  logic out_valid;
  logic [NC-1:0][Q-1:0] scores;

  poetbin_classifier dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .features(features),
                          .out_valid(out_valid), .scores(scores));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected result of the inference launched in the previous cycle
  bit exp_valid = 0;
  int exp_score[];

  initial begin
    bit f[];
    features = '0;
    repeat (2) @(posedge clk);
    checks++;
    if (out_valid !== 1'b0) begin failures++; $display("FAIL: out_valid set in reset"); end
    @(negedge clk) rst_n = 1'b1;
    for (int v = 0; v < 300; v++) begin
      // drive this cycle's input at the negative edge
      in_valid = ($urandom_range(0, 3) != 0);
      for (int k = 0; k < NFEAT; k++) features[k] = $urandom_range(0, 1) == 1;
      @(posedge clk);
      #1;
      // check the response to the previous cycle
      checks++;
      if (out_valid !== in_valid) begin
        failures++;
        $display("FAIL: out_valid=%b one cycle after in_valid=%b", out_valid, in_valid);
      end
      if (in_valid) begin
        f = new[NFEAT];
        foreach (f[k]) f[k] = features[k];
        ref_network(MODEL_SEED_DEF, P, NSUB, NC, Q, NFEAT, f, exp_score);
        for (int c = 0; c < NC; c++) begin
          checks++;
          if (int'($signed(scores[c])) != exp_score[c]) begin
            failures++;
            if (failures < 10)
              $display("FAIL v=%0d class %0d score=%0d exp=%0d", v, c, $signed(scores[c]), exp_score[c]);
          end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
