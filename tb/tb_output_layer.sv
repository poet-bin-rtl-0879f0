// tb_output_layer -- test of the sparsely connected output layer.
//
// Default size (10 neurons of 6 inputs, 8-bit scores, default model). Random
// intermediate vectors, plus one that sets a single neuron's group, are applied;
// every class score is compared with the reference model's saturating sum over that
// class's own group of intermediate neurons only.
module tb_output_layer;
  import poetbin_pkg::*;
  import poetbin_ref_pkg::*;

  localparam int unsigned P = P_DEF, NC = NC_DEF, Q = Q_DEF;

  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [NC*P-1:0] inter;
  logic [NC-1:0][Q-1:0] scores;

  output_layer dut (.inter(inter), .scores(scores));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    int w[];
    bit b[];
    int e;
    for (int c = 0; c < NC; c++) begin
      w = new[P];
      b = new[P];
      for (int j = 0; j < P; j++) begin
        w[j] = int'($signed(model_out_weight(MODEL_SEED_DEF, c, j)));
        b[j] = inter[c * P + j];
      end
      e = ref_score(w, int'($signed(model_out_bias(MODEL_SEED_DEF, c))), b, Q);
      checks++;
      if (int'($signed(scores[c])) != e) begin
        failures++;
        if (failures < 10)
          $display("FAIL class %0d inter=%h score=%0d exp=%0d", c, inter, $signed(scores[c]), e);
      end
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin
      inter = '0;
      inter[c * P +: P] = '1;
      @(posedge clk);
      check_all();
    end
    for (int v = 0; v < 1000; v++) begin
      inter = {$urandom(), $urandom()} >> (64 - NC * P);
      @(posedge clk);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
