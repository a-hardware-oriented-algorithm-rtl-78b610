// gauss_pre_tb: self-checking test of gauss_pre in both forms.
// Instantiates T_{3x2} (TILDE = 0) and T~_{3x2} (TILDE = 1) on the same
// random pairs and checks each output against the matrix rows written out
// here. It also checks the property the pair exists for: combining
// products of the two forms as (p0 + p2, p1 + p2) gives the complex product.
module gauss_pre_tb;
  localparam int unsigned PAIRS = 5, W = 17;

  logic signed [W-1:0] z  [2*PAIRS];
  logic signed [W:0]   tu [3*PAIRS];
  logic signed [W:0]   tv [3*PAIRS];
  int checks = 0, failures = 0;

  gauss_pre #(.PAIRS(PAIRS), .W(W), .TILDE(1'b0)) dut_t  (.z(z), .t(tu));
  gauss_pre #(.PAIRS(PAIRS), .W(W), .TILDE(1'b1)) dut_tt (.z(z), .t(tv));

  task automatic check(longint got, longint exp_v, string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("%s: got %0d exp %0d", what, got, exp_v);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < int'(2*PAIRS); i++) begin
        case (t)
          0: z[i] = W'(-(1 << (W-1)));
          1: z[i] = (i % 2 == 1) ? W'((1 << (W-1)) - 1) : W'(-(1 << (W-1)));
          default: z[i] = W'($urandom);
        endcase
      end
      #1;
      for (int l = 0; l < int'(PAIRS); l++) begin
        longint re, im;
        longint ar, ai, br, bi;
        re = longint'(z[2*l]);
        im = longint'(z[2*l+1]);
        check(longint'(tu[3*l]),   re,      "T row0");
        check(longint'(tu[3*l+1]), im,      "T row1");
        check(longint'(tu[3*l+2]), re - im, "T row2");
        check(longint'(tv[3*l]),   re - im, "T~ row0");
        check(longint'(tv[3*l+1]), re + im, "T~ row1");
        check(longint'(tv[3*l+2]), im,      "T~ row2");
        // Gauss product of pair l (u form) with pair (l+1) mod PAIRS (v form)
        ar = re; ai = im;
        br = longint'(z[2*((l+1)%PAIRS)]);
        bi = longint'(z[2*((l+1)%PAIRS)+1]);
        check(longint'(tu[3*l]) * longint'(tv[3*((l+1)%PAIRS)]) +
              longint'(tu[3*l+2]) * longint'(tv[3*((l+1)%PAIRS)+2]), ar*br - ai*bi, "gauss re");
        check(longint'(tu[3*l+1]) * longint'(tv[3*((l+1)%PAIRS)+1]) +
              longint'(tu[3*l+2]) * longint'(tv[3*((l+1)%PAIRS)+2]), ar*bi + ai*br, "gauss im");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
