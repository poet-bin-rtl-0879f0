// poetbin_top -- PoET-BiN classifier with its serial feature input.
//
// Binary features from an external feature extractor are shifted in one bit per
// clock (input_shift_register). Once a full vector is loaded, a start pulse presents
// it to the classifier, which returns the NC class scores one cycle later.
//
// Interface: ser_in/shift_en load the feature vector (NFEAT cycles, first bit ends up
//            as feature 0); start (one cycle) launches an inference on the register
//            contents of that cycle; out_valid pulses one cycle later with scores[c],
//            the signed Q-bit score of class c. rst_n is asynchronous, active low.
// Timing:    NFEAT cycles to load, 1 cycle to classify. Shifting may continue while an
//            inference is launched: start samples the value before that cycle's shift.
//
// Default parameters are the SVHN configuration (P = 6, 6 subgroups of 6 trees,
// 10 classes, 512 features, 8-bit scores). The serial feature path follows the
// architecture's FPGA set-up; the start/out_valid handshake is this design's choice.
module poetbin_top import poetbin_pkg::*; #(
  parameter int unsigned P     = P_DEF,
  parameter int unsigned NSUB  = NSUB_DEF,
  parameter int unsigned NC    = NC_DEF,
  parameter int unsigned Q     = Q_DEF,
  parameter int unsigned NFEAT = NFEAT_DEF,
  parameter int unsigned LEVELS = 2,
  parameter logic [31:0] SEED  = MODEL_SEED_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ser_in,
  input  logic                 shift_en,
  input  logic                 start,
  output logic                 out_valid,
  output logic [NC-1:0][Q-1:0] scores
);
  logic [NFEAT-1:0] features;

  input_shift_register #(.NFEAT(NFEAT)) u_sr (
    .clk(clk), .rst_n(rst_n), .shift_en(shift_en), .ser_in(ser_in), .features(features));

  poetbin_classifier #(
    .P(P), .NSUB(NSUB), .NC(NC), .Q(Q), .NFEAT(NFEAT), .LEVELS(LEVELS), .SEED(SEED)
  ) u_cls (
    .clk(clk), .rst_n(rst_n), .in_valid(start), .features(features),
    .out_valid(out_valid), .scores(scores));
endmodule
