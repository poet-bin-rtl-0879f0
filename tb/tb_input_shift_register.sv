// tb_input_shift_register -- test of the serial feature input.
//
// Random 512-bit vectors are shifted in one bit per clock, first bit first, with
// random idle cycles (shift_en low) in between; after each load the parallel output
// must equal the vector, with the first bit sent in features[0]. Also checks reset
// clearing and that the register holds while shift_en is low.
module tb_input_shift_register;
  import poetbin_pkg::*;

  localparam int unsigned NFEAT = NFEAT_DEF;

  int unsigned checks = 0, failures = 0, cycles = 0;
  logic clk = 1'b0, rst_n = 1'b0, shift_en = 1'b0, ser_in = 1'b0;
  logic [NFEAT-1:0] features, vec;

  input_shift_register dut (.clk(clk), .rst_n(rst_n), .shift_en(shift_en), .ser_in(ser_in),
                            .features(features));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    checks++;
    if (features !== '0) begin failures++; $display("FAIL: reset did not clear"); end
    @(negedge clk) rst_n = 1'b1;
    for (int v = 0; v < 8; v++) begin
      for (int k = 0; k < NFEAT; k++) vec[k] = $urandom_range(0, 1) == 1;
      cycles = 0;
      for (int k = 0; k < NFEAT; k++) begin
        @(negedge clk);
        if ($urandom_range(0, 7) == 0) begin   // an idle cycle
          shift_en = 1'b0;
          ser_in = ~vec[k];
          @(negedge clk);
        end
        shift_en = 1'b1;
        ser_in = vec[k];
        cycles++;
      end
      @(negedge clk) shift_en = 1'b0;
      checks++;
      if (features !== vec) begin failures++; $display("FAIL: vector %0d mismatch", v); end
      checks++;
      if (cycles != NFEAT) begin failures++; $display("FAIL: %0d shifts", cycles); end
      ser_in = 1'b1;
      repeat (3) @(negedge clk);
      checks++;
      if (features !== vec) begin failures++; $display("FAIL: did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
