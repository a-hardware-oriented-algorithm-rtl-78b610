// sigma_add: the N/2-input adders of the CCMVM, the summation matrices
// Sigma_{3M x 3MN/2} = 1_{1 x N/2} (x) I_{3M} and Sigma_{3 x 3N/2} of the
// algorithm.
//
// The input holds TERMS blocks of ROWS products; output i is the sum of
// element i of every block:  q[i] = sum_k p[k*ROWS + i].  In the multiplier
// these are the Winograd sums over the N/2 column pairs k, one adder per
// Gauss product of each output row. The result grows by clog2(TERMS) bits
// so it never overflows. Purely combinational; the adder is written as a
// loop and its tree shape is left to synthesis.
module sigma_add #(
  parameter int unsigned ROWS  = 3 * ccmvm_pkg::DEF_M,        // independent adders (3M or 3)
  parameter int unsigned TERMS = ccmvm_pkg::DEF_N / 2,        // inputs per adder (N/2)
  parameter int unsigned W     = 2 * (ccmvm_pkg::DEF_W + 2),  // input width
  localparam int unsigned OW   = W + $clog2(TERMS)
) (
  input  logic signed [W-1:0]  p [ROWS*TERMS],
  output logic signed [OW-1:0] q [ROWS]
);

  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      q[i] = '0;
      for (int k = 0; k < TERMS; k++) begin
        q[i] = q[i] + OW'(p[k*ROWS + i]);
      end
    end
  end

endmodule
