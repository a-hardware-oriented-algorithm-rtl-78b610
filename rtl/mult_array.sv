// mult_array: the bank of two-input real multipliers of the CCMVM, i.e. the
// diagonal matrices D_{3MN/2} and Psi_{3N/2} of the algorithm.
//
// Element i of u is multiplied by element i of s: p[i] = u[i] * s[i], both
// signed W-bit, result full precision (2W bits). In the paper's diagrams each
// circle is one such multiplier, the circle's label (s or epsilon) being the
// data-dependent operand. The whole design needs 3N(M+1)/2 of them. Purely
// combinational; any pipelining is done around the array by the top level.
module mult_array #(
  parameter int unsigned K = 3 * ccmvm_pkg::DEF_M * ccmvm_pkg::DEF_N / 2,  // number of multipliers
  parameter int unsigned W = ccmvm_pkg::DEF_W + 2                          // operand width
) (
  input  logic signed [W-1:0]   u [K],
  input  logic signed [W-1:0]   s [K],
  output logic signed [2*W-1:0] p [K]
);

  for (genvar i = 0; i < K; i++) begin : g_mul
    assign p[i] = (2*W)'(u[i]) * (2*W)'(s[i]);
  end

endmodule
