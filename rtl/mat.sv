// mat -- MAT unit (Multiply, Add, Threshold) realised as a single N-input LUT.
//
// A boosted ensemble combines N binary weak classifiers b[i] with weights W[i]:
// out = (sum of W[i] over the inputs with b[i] = 1) >= TH. Because the unit has only N
// one-bit inputs and one output, the multiplications, the adder tree and the
// comparator are evaluated for all 2^N input combinations at elaboration time and the
// hardware is just the resulting 2^N-entry table; no arithmetic is built.
//
// Interface: b[i] is the output of weak classifier i (address bit i); out is the
//            thresholded ensemble vote.
// Timing:    purely combinational, one LUT deep.
//
// The ">= threshold" comparison follows the architecture. Unsigned integer weights of
// WW bits are this design's choice; with TH = ceil(sum(W)/2) the unit is exactly the
// Adaboost rule sign(sum alpha_i * (2 b_i - 1)) >= 0.
module mat import poetbin_pkg::*; #(
  parameter int unsigned N  = P_DEF,
  parameter logic [N-1:0][WW-1:0] W = {N{WW'(1)}},
  parameter logic [TW-1:0] TH = TW'((N + 1) / 2)
) (
  input  logic [N-1:0] b,
  output logic         out
);
  // Truth table of the weighted threshold function.
  function automatic logic [2**N-1:0] mat_table();
    logic [2**N-1:0] t;
    logic [TW-1:0]   acc;
    for (int unsigned a = 0; a < 2**N; a++) begin
      acc = '0;
      for (int unsigned i = 0; i < N; i++)
        if (a[i]) acc = acc + TW'(W[i]);
      t[a] = (acc >= TH);
    end
    return t;
  endfunction

  localparam logic [2**N-1:0] TABLE = mat_table();

  assign out = TABLE[b];

  initial assert (N >= 1 && N <= MAX_P) else $error("mat: N must be in 1..%0d", MAX_P);
endmodule
