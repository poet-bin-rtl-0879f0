// tb_poetbin_workloads -- the three evaluated classifier configurations side by side.
//
//   MNIST    : P = 8, RINC-2 of 4 subgroups x 8 trees = 32 trees, 80 intermediate neurons
//   CIFAR-10 : P = 8, RINC-2 of 5 subgroups x 8 trees = 40 trees, 80 intermediate neurons
//   SVHN     : P = 6, RINC-2 of 6 subgroups x 6 trees = 36 trees, 60 intermediate neurons
// All read 512 binary features and produce 10 signed 8-bit class scores in one cycle.
// Each configuration (with its own stand-in model seed) classifies the same random
// feature vectors; scores and the one-cycle latency are checked against the reference
// model. Trained networks are not available, so only the datapath is exercised, not
// the accuracy.
module tb_poetbin_workloads;
  import poetbin_pkg::*;
  import poetbin_ref_pkg::*;

  localparam int unsigned NC = 10, Q = 8, NFEAT = 512;
  localparam int unsigned NCFG = 3;
  localparam int unsigned CP    [NCFG] = '{8, 8, 6};
  localparam int unsigned CSUB  [NCFG] = '{4, 5, 6};
  localparam logic [31:0] CSEED [NCFG] = '{32'h0000_0A11, 32'h0000_C1FA, 32'h0000_5F11};
  localparam string       CNAME [NCFG] = '{"MNIST", "CIFAR-10", "SVHN"};

  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [NFEAT-1:0] features;
  logic [NCFG-1:0] out_valid;
  logic [NC-1:0][Q-1:0] scores [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    poetbin_classifier #(.P(CP[g]), .NSUB(CSUB[g]), .NC(NC), .Q(Q), .NFEAT(NFEAT), .SEED(CSEED[g]))
      dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .features(features),
           .out_valid(out_valid[g]), .scores(scores[g]));
  end

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit f[];
    int e[];
    features = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int v = 0; v < 60; v++) begin
      for (int k = 0; k < NFEAT; k++) features[k] = $urandom_range(0, 1) == 1;
      in_valid = 1'b1;
      @(posedge clk);
      #1;
      f = new[NFEAT];
      foreach (f[k]) f[k] = features[k];
      for (int g = 0; g < NCFG; g++) begin
        checks++;
        if (out_valid[g] !== 1'b1) begin
          failures++;
          $display("FAIL %s: no result one cycle after in_valid", CNAME[g]);
        end
        ref_network(CSEED[g], int'(CP[g]), int'(CSUB[g]), NC, Q, NFEAT, f, e);
        for (int c = 0; c < NC; c++) begin
          checks++;
          if (int'($signed(scores[g][c])) != e[c]) begin
            failures++;
            if (failures < 10)
              $display("FAIL %s vector %0d class %0d score=%0d exp=%0d", CNAME[g], v, c,
                       $signed(scores[g][c]), e[c]);
          end
        end
      end
      @(negedge clk);
      in_valid = 1'b0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
