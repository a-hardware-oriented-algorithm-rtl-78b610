// gauss_pre: Gauss-trick pre-additions for a bank of complex numbers.
//
// Each complex number arrives as the pair (z[2l], z[2l+1]) = (re, im) and
// leaves as the three multiplier operands t[3l .. 3l+2]:
//   TILDE = 0, matrix T_{3x2}  : ( re,      im,      re - im )
//   TILDE = 1, matrix T~_{3x2} : ( re - im, re + im, im      )
// When an operand u from the first form is multiplied element-wise with an
// operand v from the second form, the three products p0, p1, p2 give the
// complex product as re = p0 + p2, im = p1 + p2 (see gauss_post). Both
// matrices are the paper's; the dashed (subtracting) lines of its diagrams
// are the "- im" terms. Outputs are one bit wider than the inputs, so no
// precision is lost. Purely combinational.
module gauss_pre #(
  parameter int unsigned PAIRS = ccmvm_pkg::DEF_M * ccmvm_pkg::DEF_N / 2,  // complex numbers handled
  parameter int unsigned W     = ccmvm_pkg::DEF_W + 1,  // input component width
  parameter bit          TILDE = 1'b0  // 0: T_{3x2}, 1: T~_{3x2}
) (
  input  logic signed [W-1:0] z [2*PAIRS],
  output logic signed [W:0]   t [3*PAIRS]
);

  for (genvar l = 0; l < PAIRS; l++) begin : g_pair
    logic signed [W:0] re, im;
    assign re = (W+1)'(z[2*l]);
    assign im = (W+1)'(z[2*l+1]);
    if (TILDE) begin : g_tilde
      assign t[3*l]   = re - im;
      assign t[3*l+1] = re + im;
      assign t[3*l+2] = im;
    end else begin : g_plain
      assign t[3*l]   = re;
      assign t[3*l+1] = im;
      assign t[3*l+2] = re - im;
    end
  end

endmodule
