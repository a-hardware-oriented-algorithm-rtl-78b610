// ccmvm_pkg: constants and elaboration-time helpers shared by the
// complex-valued constant matrix-vector multiplier (CCMVM).
//
// The multiplier computes Y = A X for a constant complex M x N matrix A and a
// complex input vector X of even length N. Internally every complex number is
// stored as two real components, real part first, which is the interleaved
// layout the algorithm is written in. The defaults here are the worked example
// the algorithm is illustrated with (N = 4 inputs, M = 3 outputs). The data
// width of 16 bits is this design's choice: with the two Gauss-trick
// pre-addition levels the multiplier operands become 18 bits wide, which maps
// onto 18x18 embedded FPGA multipliers.
//
// demo_coef() supplies the default constant matrix. Any constant matrix is
// valid; the formula only fills the bits with a spread of signs and
// magnitudes so that a default build is not trivial. It is not part of the
// algorithm.
package ccmvm_pkg;

  localparam int unsigned DEF_N = 4;   // input vector length (complex)
  localparam int unsigned DEF_M = 3;   // output vector length (complex)
  localparam int unsigned DEF_W = 16;  // width of x and a components

  // Default constant a_{m,n}, component part (0 = real, 1 = imaginary),
  // as a w-bit two's-complement number (w >= 8).
  //   v = ((131 m + 71 n + 97 part + 13) mod 251) - 125, scaled by 2^(w-8),
  //   plus (m + n) in the low bits.
  function automatic longint demo_coef(int m, int n, int part, int w);
    longint v;
    v = longint'((131 * m + 71 * n + 97 * part + 13) % 251) - 125;
    return v * (longint'(1) << (w - 8)) + longint'(m) + longint'(n);
  endfunction

  // Upper bound on M*N*W for the default constant vectors below; a larger
  // design must pass its constant matrix explicitly.
  localparam int unsigned DEMO_BITS = 8192;

  // Default matrix in the layout of ccmvm_top's A_RE / A_IM parameters:
  // entry (m,n) at bits [(m*n_cols+n)*w +: w]. Callers cast the result to
  // M*N*W bits.
  function automatic logic [DEMO_BITS-1:0] demo_matrix(int rows, int n_cols, int w, int part);
    logic [DEMO_BITS-1:0] v;
    v = '0;
    for (int m = 0; m < rows; m++)
      for (int n = 0; n < n_cols; n++)
        for (int b = 0; b < w; b++)
          v[(m*n_cols+n)*w + b] = demo_coef(m, n, part, w)[b];
    return v;
  endfunction

  // Default super-vector A^(1) (odd = 1, entries a_{m,2k+1}) or A^(2)
  // (odd = 0, entries a_{m,2k}): entry 2*rows*k + 2m + c holds component c
  // (0 real, 1 imaginary). Callers cast the result to M*N*W bits.
  function automatic logic [DEMO_BITS-1:0] demo_super(int rows, int n_cols, int w, bit odd);
    logic [DEMO_BITS-1:0] v;
    v = '0;
    for (int k = 0; k < n_cols / 2; k++)
      for (int m = 0; m < rows; m++)
        for (int c = 0; c < 2; c++)
          for (int b = 0; b < w; b++)
            v[(2*rows*k + 2*m + c)*w + b] = demo_coef(m, 2*k + int'(odd), c, w)[b];
    return v;
  endfunction

endpackage
