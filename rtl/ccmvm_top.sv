// ccmvm_top: fully parallel complex-valued constant matrix-vector multiplier,
//   y = A x,  A a constant complex M x N matrix (N even), x complex N-vector,
// built with the Winograd inner-product formula and Gauss's three-multiply
// complex product. Per column pair (2k, 2k+1) and row m it forms one complex
// product  (a_{m,2k+1} + x_{2k}) (a_{m,2k} + x_{2k+1})  with three real
// multipliers; the sum over k of these products equals y_m plus two cross
// terms, c_m (constants only, precomputed) and xi (inputs only, shared by
// all rows), which are subtracted at the end. Total: 3N(M+1)/2 real
// multipliers instead of 4MN.
//
// Data flow (procedures (5), (6), (7) of the algorithm; the paper's Fig. 1):
//   x even inputs -> enc_add (A^(1)) -> gauss_pre T_{3x2}  \
//                                                          mult_array (3MN/2)
//   x odd inputs  -> s_unit  (A^(2), T~_{3x2})            /      |
//   x even/odd    -> xi_unit (3N/2 multipliers)           sigma_add (N/2 terms)
//                                    |                    gauss_post T_{2x3}
//                                    +------------------> corr_add (- C - xi) -> y
//
// Interface: one input vector per clock when in_valid is high (x_re[n],
// x_im[n], signed W bits). A vector presented in cycle t is sampled by the
// edge that ends cycle t; two edges later the result is registered, so it
// is on the outputs, with out_valid high, during cycle t+3 (y_re[m],
// y_im[m], signed YW bits, exact: no rounding or overflow for any input or
// constant). There is no back-pressure: the
// pipeline accepts a new vector every cycle. rst_n is asynchronous, active
// low, and clears only the valid bits; data registers load only when their
// stage is valid.
//
// Timing (this design's choice; the paper describes a combinational data
// flow and says nothing about clocking): edge 1 registers the inputs, edge 2
// registers the multiplier outputs and xi, edge 3 registers y. The constant
// matrix is given by the parameters A_RE / A_IM, entry (m,n) at bits
// [(m*N+n)*W +: W]; the default is an arbitrary fixed matrix
// (ccmvm_pkg::demo_coef), since the algorithm works for any constants.
module ccmvm_top #(
  parameter int unsigned N = ccmvm_pkg::DEF_N,   // input length (complex), even
  parameter int unsigned M = ccmvm_pkg::DEF_M,   // output length (complex)
  parameter int unsigned W = ccmvm_pkg::DEF_W,   // component width of x and A
  parameter logic [M*N*W-1:0] A_RE = (M*N*W)'(ccmvm_pkg::demo_matrix(M, N, W, 0)),
  parameter logic [M*N*W-1:0] A_IM = (M*N*W)'(ccmvm_pkg::demo_matrix(M, N, W, 1)),
  localparam int unsigned GW  = W + 2,                // multiplier operand width
  localparam int unsigned PW  = 2 * GW,               // product width
  localparam int unsigned SW  = PW + $clog2(N / 2),   // Winograd sum width
  localparam int unsigned YW  = SW + 1,               // result width
  localparam int unsigned XW  = 2 * (W + 1) + $clog2(N / 2) + 1   // xi width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  x_re [N],
  input  logic signed [W-1:0]  x_im [N],
  output logic                 out_valid,
  output logic signed [YW-1:0] y_re [M],
  output logic signed [YW-1:0] y_im [M]
);

  // Super-vector A^(1) (odd = 1: entries a_{m,2k+1}) or A^(2) (odd = 0:
  // entries a_{m,2k}), entry 2Mk + 2m + c, c = 0 real, 1 imaginary.
  function automatic logic [M*N*W-1:0] super_vec(bit odd);
    logic [M*N*W-1:0] v;
    v = '0;
    for (int k = 0; k < int'(N / 2); k++)
      for (int m = 0; m < int'(M); m++) begin
        v[(2*M*k + 2*m)     * W +: W] = A_RE[(m*N + 2*k + int'(odd)) * W +: W];
        v[(2*M*k + 2*m + 1) * W +: W] = A_IM[(m*N + 2*k + int'(odd)) * W +: W];
      end
    return v;
  endfunction

  localparam logic [M*N*W-1:0] A1 = super_vec(1'b1);
  localparam logic [M*N*W-1:0] A2 = super_vec(1'b0);
  localparam int unsigned NP = 3 * M * N / 2;         // main multipliers

  // ---------------- stage 1: input register ----------------
  logic                v1;
  logic signed [W-1:0] x1_q [N];   // X^(1): x_0, x_2, ... as re, im, re, im
  logic signed [W-1:0] x2_q [N];   // X^(2): x_1, x_3, ...

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int k = 0; k < int'(N / 2); k++) begin
        x1_q[2*k]   <= x_re[2*k];
        x1_q[2*k+1] <= x_im[2*k];
        x2_q[2*k]   <= x_re[2*k+1];
        x2_q[2*k+1] <= x_im[2*k+1];
      end
    end
  end

  // ---------------- stage 1 -> 2: pre-additions and multipliers ----------------
  logic signed [W:0]    e1 [M*N];  // A^(1) + P X^(1)
  logic signed [GW-1:0] u  [NP];   // T~ (x) T_{3x2} applied to e1
  logic signed [GW-1:0] s  [NP];   // S, procedure (6)
  logic signed [PW-1:0] p  [NP];   // D applied to u
  logic signed [XW-1:0] xi [2];

  enc_add #(.N(N), .M(M), .W(W), .CONST(A1)) u_enc1 (.x(x1_q), .e(e1));

  gauss_pre #(.PAIRS(M*N/2), .W(W+1), .TILDE(1'b0)) u_pre1 (.z(e1), .t(u));

  s_unit #(.N(N), .M(M), .W(W), .A2(A2)) u_s (.x2(x2_q), .s(s));

  mult_array #(.K(NP), .W(GW)) u_mul (.u(u), .s(s), .p(p));

  xi_unit #(.N(N), .W(W)) u_xi (.x1(x1_q), .x2(x2_q), .xi(xi));

  // ---------------- stage 2: product register ----------------
  logic                 v2;
  logic signed [PW-1:0] p_q  [NP];
  logic signed [XW-1:0] xi_q [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1;
  end

  always_ff @(posedge clk) begin
    if (v1) begin
      p_q  <= p;
      xi_q <= xi;
    end
  end

  // ---------------- stage 2 -> 3: sums and corrections ----------------
  logic signed [SW-1:0] q [3*M];
  logic signed [YW-1:0] z [2*M];
  logic signed [YW-1:0] y [2*M];

  sigma_add #(.ROWS(3*M), .TERMS(N/2), .W(PW)) u_sum (.p(p_q), .q(q));

  gauss_post #(.M(M), .W(SW)) u_post (.q(q), .z(z));

  corr_add #(.N(N), .M(M), .W(W), .ZW(YW), .XW(XW), .YW(YW),
             .A_RE(A_RE), .A_IM(A_IM)) u_corr (.z(z), .xi(xi_q), .y(y));

  // ---------------- stage 3: output register ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v2;
  end

  always_ff @(posedge clk) begin
    if (v2) begin
      for (int m = 0; m < int'(M); m++) begin
        y_re[m] <= y[2*m];
        y_im[m] <= y[2*m+1];
      end
    end
  end

  initial begin
    assert (N % 2 == 0 && N >= 2) else $error("ccmvm_top: N must be even");
  end

endmodule
