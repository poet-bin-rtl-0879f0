// tb_rinc0 -- exhaustive test of the RINC-0 decision-tree LUT.
//
// Two trees (P = 6 and P = 8) with fixed leaf patterns are driven with every input
// combination; each output is compared with a root-to-leaf walk of the tree done by
// the reference model. A watchdog ends the run if it stalls.
module tb_rinc0;
  import poetbin_pkg::*;
  import poetbin_ref_pkg::*;

  localparam logic [63:0]  LV6 = 64'hC3A5_0F96_7E18_D24B;
  localparam logic [255:0] LV8 = {64'h0123_4567_89AB_CDEF, 64'hF0E1_D2C3_B4A5_9687,
                                  64'h5A5A_3C3C_0FF0_6996, 64'hDEAD_BEEF_CAFE_F00D};

  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [5:0] in6;
  logic [7:0] in8;
  logic out6, out8;

  rinc0 #(.P(6), .LEAVES(LV6)) dut6 (.in(in6), .out(out6));
  rinc0 #(.P(8), .LEAVES(LV8)) dut8 (.in(in8), .out(out8));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit x[];
    for (int a = 0; a < 64; a++) begin
      in6 = 6'(a);
      #1;
      x = new[6];
      foreach (x[j]) x[j] = in6[j];
      checks++;
      if (out6 !== ref_tree(MAX_LEAVES'(LV6), 6, x)) begin
        failures++;
        $display("FAIL P=6 in=%b out=%b", in6, out6);
      end
    end
    for (int a = 0; a < 256; a++) begin
      in8 = 8'(a);
      #1;
      x = new[8];
      foreach (x[j]) x[j] = in8[j];
      checks++;
      if (out8 !== ref_tree(MAX_LEAVES'(LV8), 8, x)) begin
        failures++;
        $display("FAIL P=8 in=%b out=%b", in8, out8);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
