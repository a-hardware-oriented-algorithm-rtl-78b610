// xi_unit: the data-dependent Winograd correction term
//   xi = sum_{k=0}^{N/2-1} x_{2k} * x_{2k+1}   (complex),
// procedure (7) of the algorithm, computed with 3N/2 real multipliers.
//
// x1 = X^(1) (even-numbered inputs) and x2 = X^(2) (odd-numbered inputs),
// each N real components. x1 is expanded by T_{3x2}, x2 by T~_{3x2} (the
// latter gives the epsilon operands, the diagonal of Psi_{3N/2}); the
// element-wise products are summed over k by three N/2-input adders
// (Sigma_{3 x 3N/2}) and T_{2x3} folds the three sums into xi. The output is
// (xi_re, xi_im); the broadcast P_{2M x 2} to all M rows is wiring done where
// xi is used (corr_add). Widths: W in, 2W+3+clog2(N/2) out, exact.
// Purely combinational; follows the paper's Fig. 3a and 3b.
module xi_unit #(
  parameter int unsigned N  = ccmvm_pkg::DEF_N,
  parameter int unsigned W  = ccmvm_pkg::DEF_W,
  localparam int unsigned GW = W + 1,                 // operand width
  localparam int unsigned PW = 2 * GW,                // product width
  localparam int unsigned SW = PW + $clog2(N / 2),    // sum width
  localparam int unsigned XW = SW + 1                 // xi width
) (
  input  logic signed [W-1:0]  x1 [N],
  input  logic signed [W-1:0]  x2 [N],
  output logic signed [XW-1:0] xi [2]
);

  logic signed [GW-1:0] u   [3*N/2];
  logic signed [GW-1:0] eps [3*N/2];
  logic signed [PW-1:0] p   [3*N/2];
  logic signed [SW-1:0] q   [3];

  gauss_pre #(.PAIRS(N/2), .W(W), .TILDE(1'b0)) u_pre_x1 (.z(x1), .t(u));
  gauss_pre #(.PAIRS(N/2), .W(W), .TILDE(1'b1)) u_pre_x2 (.z(x2), .t(eps));

  mult_array #(.K(3*N/2), .W(GW)) u_mul (.u(u), .s(eps), .p(p));

  sigma_add #(.ROWS(3), .TERMS(N/2), .W(PW)) u_sum (.p(p), .q(q));

  gauss_post #(.M(1), .W(SW)) u_post (.q(q), .z(xi));

endmodule
