// input_shift_register -- serial-in, parallel-out register for the binary features.
//
// The classifier needs all NFEAT binary features at once, far more than the pins of a
// small FPGA, so the features arrive one bit per clock on a single input. While
// shift_en is high the register shifts towards bit 0 and takes ser_in into the top
// bit; after NFEAT shifts the first bit sent sits in features[0] and the last in
// features[NFEAT-1]. When shift_en is low the register holds.
//
// Interface: ser_in/shift_en sampled on the rising edge of clk; rst_n is an
//            asynchronous active-low reset that clears the register.
// Timing:    NFEAT cycles to load a full feature vector.
//
// A single-input shift register as the feature path follows the architecture's FPGA
// implementation; shift direction and reset are this design's choices.
module input_shift_register import poetbin_pkg::*; #(
  parameter int unsigned NFEAT = NFEAT_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             shift_en,
  input  logic             ser_in,
  output logic [NFEAT-1:0] features
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        features <= '0;
    else if (shift_en) features <= {ser_in, features[NFEAT-1:1]};
  end
endmodule
