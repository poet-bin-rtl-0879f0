// tb_output_neuron -- exhaustive test of a Q-bit LUT-based output neuron.
//
// A 6-input neuron with 8-bit scores and weights large enough to reach both ends of
// the range is driven with all 64 input patterns; the score is compared with the
// reference model's saturating weighted sum. Both kinds of saturation must occur.
// A second 8-input neuron with 4-bit scores checks another width.
module tb_output_neuron;
  import poetbin_pkg::*;
  import poetbin_ref_pkg::*;

  localparam logic [5:0][OW-1:0] W6 = {8'sd100, -8'sd90, 8'sd45, -8'sd120, 8'sd60, 8'sd7};
  localparam logic [OW-1:0]       B6 = -8'sd3;
  localparam logic [7:0][OW-1:0] W8 = {8'sd1, -8'sd2, 8'sd3, -8'sd4, 8'sd5, -8'sd6, 8'sd2, 8'sd1};
  localparam logic [OW-1:0]       B8 = 8'sd1;

  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [5:0] in6;
  logic [7:0] in8;
  logic [7:0] s6;
  logic [3:0] s4;

  output_neuron #(.P(6), .Q(8), .W(W6), .BIAS(B6)) dut6 (.in(in6), .score(s6));
  output_neuron #(.P(8), .Q(4), .W(W8), .BIAS(B8)) dut8 (.in(in8), .score(s4));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w[];
    bit b[];
    int e;
    ref_clear_stats();
    for (int a = 0; a < 64; a++) begin
      in6 = 6'(a);
      #1;
      w = new[6];
      b = new[6];
      foreach (w[j]) begin w[j] = int'($signed(W6[j])); b[j] = in6[j]; end
      e = ref_score(w, int'($signed(B6)), b, 8);
      checks++;
      if (int'($signed(s6)) != e) begin
        failures++;
        $display("FAIL P=6 in=%b score=%0d exp=%0d", in6, $signed(s6), e);
      end
    end
    checks++;
    if (st_sat_hi == 0 || st_sat_lo == 0) begin
      failures++;
      $display("FAIL: saturation not exercised (hi=%0d lo=%0d)", st_sat_hi, st_sat_lo);
    end
    for (int a = 0; a < 256; a++) begin
      in8 = 8'(a);
      #1;
      w = new[8];
      b = new[8];
      foreach (w[j]) begin w[j] = int'($signed(W8[j])); b[j] = in8[j]; end
      e = ref_score(w, int'($signed(B8)), b, 4);
      checks++;
      if (int'($signed(s4)) != e) begin
        failures++;
        $display("FAIL P=8 in=%b score=%0d exp=%0d", in8, $signed(s4), e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
