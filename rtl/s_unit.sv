// s_unit: generator of the data-dependent multiplier operands S (the diagonal
// of D_{3MN/2}), procedure (6) of the algorithm:
//   S = T~_{3MN/2 x MN} (A^(2) + P X^(2)).
//
// x2 is X^(2), the odd-numbered complex inputs x_1, x_3, ... in
// real-component form (N components). Each odd input x_{2k+1} is added to
// the constants a_{m,2k} of every row m (enc_add) and the resulting complex
// number v = a_{m,2k} + x_{2k+1} is expanded by T~_{3x2} into
// (v_re - v_im, v_re + v_im, v_im) (gauss_pre, TILDE = 1). Output s[3l+j]
// is s_j^(l) with l = M*k + m. Widths: W in, W+2 out. Purely combinational.
// Structure and ordering follow the paper's Fig. 2.
module s_unit #(
  parameter int unsigned N = ccmvm_pkg::DEF_N,
  parameter int unsigned M = ccmvm_pkg::DEF_M,
  parameter int unsigned W = ccmvm_pkg::DEF_W,
  // super-vector A^(2) (default: that of the default matrix)
  parameter logic [M*N*W-1:0] A2 = (M*N*W)'(ccmvm_pkg::demo_super(M, N, W, 1'b0))
) (
  input  logic signed [W-1:0] x2 [N],
  output logic signed [W+1:0] s  [3*M*N/2]
);

  logic signed [W:0] v [M*N];

  enc_add #(.N(N), .M(M), .W(W), .CONST(A2)) u_enc (
    .x (x2),
    .e (v)
  );

  gauss_pre #(.PAIRS(M*N/2), .W(W+1), .TILDE(1'b1)) u_pre (
    .z (v),
    .t (s)
  );

endmodule
