// gauss_post: Gauss-trick post-additions, the matrix
// T^_{2M x 3M} = I_M (x) T_{2x3},  T_{2x3} = [1 0 1; 0 1 1].
//
// Each group of three summed products (q[3m], q[3m+1], q[3m+2]) becomes one
// complex value: z[2m] = q[3m] + q[3m+2] (real), z[2m+1] = q[3m+1] + q[3m+2]
// (imaginary). With the operand forms produced by gauss_pre this yields
// ac - bd and ad + bc, i.e. a complex product from three real products. The
// output is one bit wider than the input. Purely combinational.
module gauss_post #(
  parameter int unsigned M = ccmvm_pkg::DEF_M,   // complex outputs
  parameter int unsigned W = 2 * (ccmvm_pkg::DEF_W + 2) + $clog2(ccmvm_pkg::DEF_N / 2)  // input width
) (
  input  logic signed [W-1:0] q [3*M],
  output logic signed [W:0]   z [2*M]
);

  for (genvar m = 0; m < M; m++) begin : g_row
    assign z[2*m]   = (W+1)'(q[3*m])   + (W+1)'(q[3*m+2]);
    assign z[2*m+1] = (W+1)'(q[3*m+1]) + (W+1)'(q[3*m+2]);
  end

endmodule
