// corr_add: final Winograd corrections of the CCMVM. It holds the vector C
// of precomputed constants and subtracts it, and the run-time term xi, from
// the Gauss-combined sums z:
//   y[2m + c] = z[2m + c] - C[2m + c] - xi[c],   c = 0 (re), 1 (im),
//   c_m = sum_{k=0}^{N/2-1} a_{m,2k} * a_{m,2k+1}  (complex).
// C depends only on the constant matrix, so it is worked out at elaboration
// from A_RE / A_IM (entry (m,n) at bits [(m*N+n)*W +: W]) and becomes a
// table of constants in the netlist, as the algorithm intends: no
// multiplier is spent on it. xi is broadcast to all M rows (P_{2M x 2}).
// All arithmetic is two's complement modulo 2^YW; since the true product
// A X fits in YW bits, y is exact even though z alone may need more.
// Purely combinational.
//
// The paper writes eq. (5) with plus signs for C and Xi but defines
// y = (sum of products) - c_m - xi in eq. (3); this block follows eq. (3)
// and stores c_m itself.
module corr_add #(
  parameter int unsigned N  = ccmvm_pkg::DEF_N,
  parameter int unsigned M  = ccmvm_pkg::DEF_M,
  parameter int unsigned W  = ccmvm_pkg::DEF_W,     // constant width
  parameter int unsigned ZW = 2 * (W + 2) + $clog2(N / 2) + 1,  // width of z
  parameter int unsigned XW = 2 * (W + 1) + $clog2(N / 2) + 1,  // width of xi
  parameter int unsigned YW = ZW,                               // width of y
  parameter logic [M*N*W-1:0] A_RE = (M*N*W)'(ccmvm_pkg::demo_matrix(M, N, W, 0)),
  parameter logic [M*N*W-1:0] A_IM = (M*N*W)'(ccmvm_pkg::demo_matrix(M, N, W, 1))
) (
  input  logic signed [ZW-1:0] z  [2*M],
  input  logic signed [XW-1:0] xi [2],
  output logic signed [YW-1:0] y  [2*M]
);

  // c_m, part 0 = real, 1 = imaginary, reduced to YW bits.
  function automatic logic signed [YW-1:0] c_val(int m, int part);
    logic signed [YW-1:0] acc, ar, ai, br, bi;
    acc = '0;
    for (int k = 0; k < int'(N / 2); k++) begin
      ar = YW'(signed'(A_RE[(m*N + 2*k)     * W +: W]));
      ai = YW'(signed'(A_IM[(m*N + 2*k)     * W +: W]));
      br = YW'(signed'(A_RE[(m*N + 2*k + 1) * W +: W]));
      bi = YW'(signed'(A_IM[(m*N + 2*k + 1) * W +: W]));
      if (part == 0) acc = acc + ar * br - ai * bi;
      else           acc = acc + ar * bi + ai * br;
    end
    return acc;
  endfunction

  for (genvar m = 0; m < M; m++) begin : g_row
    for (genvar c = 0; c < 2; c++) begin : g_part
      localparam logic signed [YW-1:0] C = c_val(m, c);
      assign y[2*m+c] = YW'(z[2*m+c]) - C - YW'(xi[c]);
    end
  end

endmodule
