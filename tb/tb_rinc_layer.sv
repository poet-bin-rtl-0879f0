// tb_rinc_layer -- test of the intermediate layer at its default size.
//
// 60 RINC-2 modules (P = 6, 6 subgroups) over 512 features. Random feature vectors
// are applied and every intermediate neuron is compared with the reference model,
// which routes the features, walks the 36 trees and takes both Adaboost votes. Both
// values of the first- and second-level votes must have occurred.
module tb_rinc_layer;
  import poetbin_pkg::*;
  import poetbin_ref_pkg::*;

  localparam int unsigned P = P_DEF, NSUB = NSUB_DEF, NC = NC_DEF, NFEAT = NFEAT_DEF;

  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [NFEAT-1:0] features;
  logic [NC*P-1:0] inter;

  rinc_layer dut (.features(features), .inter(inter));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit f[];
    bit e;
    ref_clear_stats();
    for (int v = 0; v < 200; v++) begin
      for (int k = 0; k < NFEAT; k++) features[k] = $urandom_range(0, 1) == 1;
      @(posedge clk);
      f = new[NFEAT];
      foreach (f[k]) f[k] = features[k];
      for (int n = 0; n < NC * P; n++) begin
        e = ref_neuron(MODEL_SEED_DEF, P, NSUB, NFEAT, n, f);
        checks++;
        if (inter[n] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL vector %0d neuron %0d out=%b exp=%b", v, n, inter[n], e);
        end
      end
    end
    checks++;
    if (st_mat1_one == 0 || st_mat1_zero == 0 || st_mat2_one == 0 || st_mat2_zero == 0) begin
      failures++;
      $display("FAIL: votes not exercised %0d %0d %0d %0d",
               st_mat1_one, st_mat1_zero, st_mat2_one, st_mat2_zero);
    end
    $display("votes: level1 one=%0d zero=%0d, level2 one=%0d zero=%0d",
             st_mat1_one, st_mat1_zero, st_mat2_one, st_mat2_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
