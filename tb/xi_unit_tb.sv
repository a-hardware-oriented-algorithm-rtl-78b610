// xi_unit_tb: self-checking test of xi_unit. Checks
// xi = sum_k x_{2k} x_{2k+1} (complex, schoolbook product computed here)
// for the paper's example size N = 4 and for N = 8, with random and
// full-scale inputs.
module xi_unit_tb;
  localparam int unsigned W = 16;

  logic signed [W-1:0] a1 [4], a2 [4];
  logic signed [W-1:0] b1 [8], b2 [8];
  logic signed [2*(W+1)+1+1-1:0] xa [2];
  logic signed [2*(W+1)+2+1-1:0] xb [2];
  int checks = 0, failures = 0;

  xi_unit #(.N(4), .W(W)) dut4 (.x1(a1), .x2(a2), .xi(xa));
  xi_unit #(.N(8), .W(W)) dut8 (.x1(b1), .x2(b2), .xi(xb));

  function automatic logic signed [W-1:0] stim(int t, int i);
    case (t)
      0: return W'(-(1 << (W-1)));
      1: return (i % 2) ? W'((1 << (W-1)) - 1) : W'(-(1 << (W-1)));
      default: return W'($urandom);
    endcase
  endfunction

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
      longint er, ei;
      for (int i = 0; i < 4; i++) begin a1[i] = stim(t, i); a2[i] = stim(t, i + 1); end
      for (int i = 0; i < 8; i++) begin b1[i] = stim(t, i); b2[i] = stim(t, i); end
      #1;
      er = 0; ei = 0;
      for (int k = 0; k < 2; k++) begin
        er += longint'(a1[2*k]) * longint'(a2[2*k]) - longint'(a1[2*k+1]) * longint'(a2[2*k+1]);
        ei += longint'(a1[2*k]) * longint'(a2[2*k+1]) + longint'(a1[2*k+1]) * longint'(a2[2*k]);
      end
      check(longint'(xa[0]), er, "N=4 re");
      check(longint'(xa[1]), ei, "N=4 im");
      er = 0; ei = 0;
      for (int k = 0; k < 4; k++) begin
        er += longint'(b1[2*k]) * longint'(b2[2*k]) - longint'(b1[2*k+1]) * longint'(b2[2*k+1]);
        ei += longint'(b1[2*k]) * longint'(b2[2*k+1]) + longint'(b1[2*k+1]) * longint'(b2[2*k]);
      end
      check(longint'(xb[0]), er, "N=8 re");
      check(longint'(xb[1]), ei, "N=8 im");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
