// tb_poetbin_top -- end-to-end test of the complete design at its default size.
//
// Default parameters throughout (SVHN configuration: P = 6, 60 RINC-2 modules of 36
// trees, 512 features, 10 classes, 8-bit scores). Each round shifts a random
// feature vector in serially (512 clocks, with occasional idle cycles), pulses start
// and checks that out_valid comes exactly one cycle later with the reference model's
// ten class scores. Some rounds pulse start in the same cycle as the first shift of
// the next vector (the inference must still see the complete old vector), one round
// applies a reset in the middle of a load, and some feature vectors are biased to
// push the output neurons into saturation.
//
// Mechanisms counted, each of which must occur at least once: serial loads, idle
// shift cycles, inferences, start during shifting, mid-load reset, both values of
// a first-level (subgroup) vote, both values of a second-level vote (intermediate
// neuron), and saturation of a score at the top and at the bottom of its range.
module tb_poetbin_top;
  import poetbin_pkg::*;
  import poetbin_ref_pkg::*;

  localparam int unsigned P = P_DEF, NSUB = NSUB_DEF, NC = NC_DEF, Q = Q_DEF, NFEAT = NFEAT_DEF;
  localparam int unsigned ROUNDS = 24;

  int unsigned checks = 0, failures = 0;
  int unsigned n_load = 0, n_idle = 0, n_infer = 0, n_overlap = 0, n_reset = 0;
  logic clk = 1'b0, rst_n = 1'b0, ser_in = 1'b0, shift_en = 1'b0, start = 1'b0;
  logic out_valid;
  logic [NC-1:0][Q-1:0] scores;

  poetbin_top dut (.clk(clk), .rst_n(rst_n), .ser_in(ser_in), .shift_en(shift_en),
                   .start(start), .out_valid(out_valid), .scores(scores));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (ROUNDS * 700 + 2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // out_valid must never rise without a start in the previous cycle
  logic start_q = 1'b0;
  always @(posedge clk) begin
    if (out_valid && !start_q) begin
      failures++;
      $display("FAIL: out_valid without a start");
    end
    start_q <= start && rst_n;
  end

  task automatic check_scores(input bit vec[], input string what);
    int e[];
    ref_network(MODEL_SEED_DEF, P, NSUB, NC, Q, NFEAT, vec, e);
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (int'($signed(scores[c])) != e[c]) begin
        failures++;
        if (failures < 10)
          $display("FAIL %s class %0d score=%0d exp=%0d", what, c, $signed(scores[c]), e[c]);
      end
    end
  endtask

  // one serial bit (at the negative edge), with an optional idle cycle before it
  task automatic send_bit(input bit b, input bit with_start);
    @(negedge clk);
    if ($urandom_range(0, 15) == 0 && !with_start) begin
      shift_en = 1'b0;
      ser_in = ~b;
      n_idle++;
      @(negedge clk);
    end
    shift_en = 1'b1;
    ser_in = b;
    start = with_start;
  endtask

  task automatic make_vector(input int round, output bit vec[]);
    vec = new[NFEAT];
    foreach (vec[k]) begin
      case (round % 4)
        1:       vec[k] = $urandom_range(0, 9) < 8;   // mostly ones
        2:       vec[k] = $urandom_range(0, 9) < 2;   // mostly zeros
        default: vec[k] = $urandom_range(0, 1) == 1;
      endcase
    end
  endtask

  initial begin
    bit cur[], nxt[];
    bit overlap;
    int unsigned t_start;
    ref_clear_stats();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // a load cut short by a reset: the register must come back cleared
    make_vector(0, cur);
    for (int k = 0; k < NFEAT / 2; k++) send_bit(cur[k], 1'b0);
    @(negedge clk);
    shift_en = 1'b0;
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    n_reset++;
    checks++;
    if (dut.features !== '0 || out_valid !== 1'b0) begin
      failures++;
      $display("FAIL: reset in the middle of a load did not clear the design");
    end

    make_vector(0, cur);
    for (int k = 0; k < NFEAT; k++) send_bit(cur[k], 1'b0);
    n_load++;
    for (int r = 1; r <= ROUNDS; r++) begin
      overlap = (r % 3 == 0) && (r < ROUNDS);
      make_vector(r, nxt);
      if (overlap) begin
        // start together with the first shift of the next vector
        send_bit(nxt[0], 1'b1);
        n_overlap++;
      end else begin
        @(negedge clk);
        shift_en = 1'b0;
        start = 1'b1;
      end
      t_start = 0;
      @(negedge clk);
      start = 1'b0;
      if (overlap) begin
        shift_en = 1'b1;
        ser_in = nxt[1];
      end else shift_en = 1'b0;
      // out_valid is due exactly one clock after the start cycle
      checks++;
      if (out_valid !== 1'b1) begin
        failures++;
        $display("FAIL round %0d: no out_valid one cycle after start", r);
      end
      check_scores(cur, $sformatf("round %0d", r));
      n_infer++;
      if (r == ROUNDS) break;
      // load the next vector (two bits already sent on an overlapped round)
      for (int k = overlap ? 2 : 0; k < NFEAT; k++) send_bit(nxt[k], 1'b0);
      n_load++;
      cur = nxt;
    end
    @(negedge clk);
    shift_en = 1'b0;

    $display("mechanisms: loads=%0d idle=%0d inferences=%0d start_while_shifting=%0d resets=%0d",
             n_load, n_idle, n_infer, n_overlap, n_reset);
    $display("votes: level1 one=%0d zero=%0d, level2 one=%0d zero=%0d, saturation hi=%0d lo=%0d",
             st_mat1_one, st_mat1_zero, st_mat2_one, st_mat2_zero, st_sat_hi, st_sat_lo);
    if (n_load == 0)      begin failures++; $display("FAIL: no serial load"); end
    if (n_idle == 0)      begin failures++; $display("FAIL: no idle shift cycle"); end
    if (n_infer == 0)     begin failures++; $display("FAIL: no inference"); end
    if (n_overlap == 0)   begin failures++; $display("FAIL: no start while shifting"); end
    if (n_reset == 0)     begin failures++; $display("FAIL: no mid-load reset"); end
    if (st_mat1_one == 0 || st_mat1_zero == 0) begin failures++; $display("FAIL: level-1 vote one-sided"); end
    if (st_mat2_one == 0 || st_mat2_zero == 0) begin failures++; $display("FAIL: level-2 vote one-sided"); end
    if (st_sat_hi == 0)   begin failures++; $display("FAIL: no high saturation"); end
    if (st_sat_lo == 0)   begin failures++; $display("FAIL: no low saturation"); end
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
