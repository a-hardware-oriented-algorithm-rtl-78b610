// corr_add_tb: self-checking test of corr_add. The constant matrix is fixed
// here; the test computes c_m = sum_k a_{m,2k} a_{m,2k+1} itself and checks
// y = z - c_m - xi for random z and xi. z and xi are kept small enough that
// y fits YW bits, the condition under which the block promises exact
// results.
module corr_add_tb;
  localparam int unsigned N = 4, M = 3, W = 16;
  localparam int unsigned ZW = 38, XW = 36, YW = 38;

  function automatic int coef(int m, int n, int part);
    return ((m * 27191 + n * 4099 + part * 21011 + 55) % 65536) - 32768;
  endfunction
  function automatic logic [M*N*W-1:0] make_a(int part);
    logic [M*N*W-1:0] v;
    for (int m = 0; m < int'(M); m++)
      for (int n = 0; n < int'(N); n++)
        v[(m*N+n)*W +: W] = W'(coef(m, n, part));
    return v;
  endfunction

  logic signed [ZW-1:0] z  [2*M];
  logic signed [XW-1:0] xi [2];
  logic signed [YW-1:0] y  [2*M];
  int checks = 0, failures = 0;

  corr_add #(.N(N), .M(M), .W(W), .ZW(ZW), .XW(XW), .YW(YW),
             .A_RE(make_a(0)), .A_IM(make_a(1))) dut (.z(z), .xi(xi), .y(y));

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < int'(2*M); i++) z[i] = ZW'(signed'(34'($urandom) << 1));
      xi[0] = XW'(signed'(33'($urandom)));
      xi[1] = XW'(signed'(33'($urandom)));
      #1;
      for (int m = 0; m < int'(M); m++) begin
        longint cr, ci;
        cr = 0; ci = 0;
        for (int k = 0; k < int'(N/2); k++) begin
          longint ar, ai, br, bi;
          ar = longint'(coef(m, 2*k, 0));   ai = longint'(coef(m, 2*k, 1));
          br = longint'(coef(m, 2*k+1, 0)); bi = longint'(coef(m, 2*k+1, 1));
          cr += ar*br - ai*bi;
          ci += ar*bi + ai*br;
        end
        checks += 2;
        if (longint'(y[2*m]) != longint'(z[2*m]) - cr - longint'(xi[0])) begin
          failures++;
          if (failures < 10) $display("t=%0d row %0d re: got %0d", t, m, y[2*m]);
        end
        if (longint'(y[2*m+1]) != longint'(z[2*m+1]) - ci - longint'(xi[1])) begin
          failures++;
          if (failures < 10) $display("t=%0d row %0d im: got %0d", t, m, y[2*m+1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
