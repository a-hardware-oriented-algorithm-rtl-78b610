// gauss_post_tb: self-checking test of gauss_post, the matrix
// I_M (x) [1 0 1; 0 1 1], against the row sums written out here.
module gauss_post_tb;
  localparam int unsigned M = 3, W = 37;

  logic signed [W-1:0] q [3*M];
  logic signed [W:0]   z [2*M];
  int checks = 0, failures = 0;

  gauss_post #(.M(M), .W(W)) dut (.q(q), .z(z));

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < int'(3*M); i++) begin
        case (t)
          0: q[i] = {1'b1, {(W-1){1'b0}}};
          1: q[i] = {1'b0, {(W-1){1'b1}}};
          default: q[i] = W'({$urandom, $urandom});
        endcase
      end
      #1;
      for (int m = 0; m < int'(M); m++) begin
        checks += 2;
        if (longint'(z[2*m]) != longint'(q[3*m]) + longint'(q[3*m+2])) begin
          failures++;
          if (failures < 10) $display("t=%0d re %0d wrong", t, m);
        end
        if (longint'(z[2*m+1]) != longint'(q[3*m+1]) + longint'(q[3*m+2])) begin
          failures++;
          if (failures < 10) $display("t=%0d im %0d wrong", t, m);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
