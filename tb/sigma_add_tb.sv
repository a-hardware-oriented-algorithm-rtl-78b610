// sigma_add_tb: self-checking test of sigma_add (the N/2-input adders).
// Uses 4 terms per adder so that the growth bits are exercised; inputs at
// the negative limit check that the sum does not wrap.
module sigma_add_tb;
  localparam int unsigned ROWS = 9, TERMS = 4, W = 36;
  localparam int unsigned OW = W + $clog2(TERMS);

  logic signed [W-1:0]  p [ROWS*TERMS];
  logic signed [OW-1:0] q [ROWS];
  int checks = 0, failures = 0;

  sigma_add #(.ROWS(ROWS), .TERMS(TERMS), .W(W)) dut (.p(p), .q(q));

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < int'(ROWS*TERMS); i++) begin
        case (t)
          0: p[i] = {1'b1, {(W-1){1'b0}}};
          1: p[i] = {1'b0, {(W-1){1'b1}}};
          default: p[i] = W'({$urandom, $urandom});
        endcase
      end
      #1;
      for (int r = 0; r < int'(ROWS); r++) begin
        longint exp_v;
        exp_v = 0;
        for (int k = 0; k < int'(TERMS); k++) exp_v += longint'(p[k*ROWS + r]);
        checks++;
        if (longint'(q[r]) != exp_v) begin
          failures++;
          if (failures < 10) $display("t=%0d row %0d got %0d exp %0d", t, r, q[r], exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
