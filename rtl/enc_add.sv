// enc_add: the "encoders" of the CCMVM, i.e. the one-input adders with a
// constant operand that form A + P X in the algorithm.
//
// The input x is one half of the input vector in real-component form: N
// components x[2k] (real) and x[2k+1] (imaginary) of the complex inputs of
// one parity (all even-numbered inputs, or all odd-numbered inputs). The
// routing matrix P = I_{N/2} (x) (1_{M x 1} (x) I_2) copies complex input k
// to all M rows, and each copy is added to its own constant:
//   e[2Mk + 2m + c] = CONST[2Mk + 2m + c] + x[2k + c],  c = 0 (re), 1 (im).
// CONST is the constant super-vector A^(1) (entries a_{m,2k+1}) or A^(2)
// (entries a_{m,2k}) in that same order, packed W bits per entry with entry
// 0 in the least significant bits. The sum is kept at full precision (W+1
// bits). The block is purely combinational.
//
// The structure follows the paper's rectangles a_{m,n} in its data flow
// diagrams; building them as plain adders rather than hard-wired constant
// encoders is this design's choice (the paper names both options).
module enc_add #(
  parameter int unsigned N = ccmvm_pkg::DEF_N,   // real components of x (= complex inputs of the full vector)
  parameter int unsigned M = ccmvm_pkg::DEF_M,   // matrix rows
  parameter int unsigned W = ccmvm_pkg::DEF_W,   // component width
  // constant super-vector, M*N entries (default: A^(1) of the default matrix)
  parameter logic [M*N*W-1:0] CONST = (M*N*W)'(ccmvm_pkg::demo_super(M, N, W, 1'b1))
) (
  input  logic signed [W-1:0] x [N],
  output logic signed [W:0]   e [M*N]
);

  for (genvar k = 0; k < N / 2; k++) begin : g_pair
    for (genvar m = 0; m < M; m++) begin : g_row
      for (genvar c = 0; c < 2; c++) begin : g_part
        localparam int unsigned IDX = 2 * M * k + 2 * m + c;
        localparam logic signed [W-1:0] K = CONST[IDX*W +: W];
        assign e[IDX] = (W+1)'(K) + (W+1)'(x[2*k+c]);
      end
    end
  end

endmodule
