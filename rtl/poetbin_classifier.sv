// poetbin_classifier -- the PoET-BiN classifier: RINC-2 layer plus sparse output layer.
//
// The binary feature vector goes through the intermediate layer (NC*P RINC-2
// modules, three LUT levels) and the sparsely connected output layer (one LUT level),
// four LUT levels of pure combinational logic with no memory access and no
// arithmetic. The class scores are captured in a register, so one inference takes a
// single clock cycle and a new one can start every cycle.
//
// Interface: in_valid qualifies features in the cycle they are presented; one cycle
//            later out_valid is high for one cycle and scores holds the NC signed
//            Q-bit class scores (scores hold their value until the next inference).
//            rst_n is an asynchronous active-low reset of out_valid and scores.
// Timing:    latency 1 cycle, throughput 1 inference per cycle.
//
// The single-cycle, unpipelined organisation follows the architecture; the valid
// handshake and the reset are this design's choices. Picking the winning class from
// the scores is left to the consumer, as in the architecture.
module poetbin_classifier import poetbin_pkg::*; #(
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
  input  logic                 in_valid,
  input  logic [NFEAT-1:0]     features,
  output logic                 out_valid,
  output logic [NC-1:0][Q-1:0] scores
);
  logic [NC*P-1:0]      inter;       // intermediate binary neurons
  logic [NC-1:0][Q-1:0] scores_comb;

  rinc_layer #(.P(P), .NSUB(NSUB), .NC(NC), .NFEAT(NFEAT), .LEVELS(LEVELS), .SEED(SEED)) u_layer (
    .features(features), .inter(inter));

  output_layer #(.P(P), .NC(NC), .Q(Q), .SEED(SEED)) u_out (
    .inter(inter), .scores(scores_comb));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      scores    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) scores <= scores_comb;
    end
  end
endmodule
