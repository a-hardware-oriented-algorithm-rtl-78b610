// s_unit_tb: self-checking test of s_unit, procedure (6). For every row m
// and column pair k the test forms v = a_{m,2k} + x_{2k+1} itself and checks
// the three outputs of block l = M*k + m against (v_re - v_im, v_re + v_im,
// v_im). The constants a_{m,n} are random-looking values fixed at
// elaboration, at full range.
module s_unit_tb;
  localparam int unsigned N = 4, M = 3, W = 16;

  function automatic int coef(int m, int n, int part);
    return ((m * 40503 + n * 9973 + part * 31337 + 777) % 65536) - 32768;
  endfunction

  // A^(2): entry 2Mk + 2m + c is component c of a_{m,2k}
  function automatic logic [M*N*W-1:0] make_a2();
    logic [M*N*W-1:0] v;
    for (int k = 0; k < int'(N/2); k++)
      for (int m = 0; m < int'(M); m++)
        for (int c = 0; c < 2; c++)
          v[(2*M*k + 2*m + c)*W +: W] = W'(coef(m, 2*k, c));
    return v;
  endfunction

  logic signed [W-1:0] x2 [N];
  logic signed [W+1:0] s  [3*M*N/2];
  int checks = 0, failures = 0;

  s_unit #(.N(N), .M(M), .W(W), .A2(make_a2())) dut (.x2(x2), .s(s));

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int n = 0; n < int'(N); n++) begin
        case (t)
          0: x2[n] = W'(-(1 << (W-1)));
          1: x2[n] = (n % 2) ? W'((1 << (W-1)) - 1) : W'(-(1 << (W-1)));
          default: x2[n] = W'($urandom);
        endcase
      end
      #1;
      for (int k = 0; k < int'(N/2); k++)
        for (int m = 0; m < int'(M); m++) begin
          longint vr, vi;
          int l;
          l  = int'(M) * k + m;
          vr = longint'(coef(m, 2*k, 0)) + longint'(x2[2*k]);
          vi = longint'(coef(m, 2*k, 1)) + longint'(x2[2*k+1]);
          checks += 3;
          if (longint'(s[3*l])   != vr - vi) failures++;
          if (longint'(s[3*l+1]) != vr + vi) failures++;
          if (longint'(s[3*l+2]) != vi)      failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
