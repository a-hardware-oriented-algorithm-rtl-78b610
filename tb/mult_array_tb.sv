// mult_array_tb: self-checking test of mult_array. Random and extreme signed
// operands (including -2^(W-1) squared, the largest product) are compared
// with 64-bit products computed here.
module mult_array_tb;
  localparam int unsigned K = 7, W = 18;

  logic signed [W-1:0]   u [K];
  logic signed [W-1:0]   s [K];
  logic signed [2*W-1:0] p [K];
  int checks = 0, failures = 0;

  mult_array #(.K(K), .W(W)) dut (.u(u), .s(s), .p(p));

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < int'(K); i++) begin
        case (t)
          0: begin u[i] = W'(-(1 << (W-1))); s[i] = W'(-(1 << (W-1))); end
          1: begin u[i] = W'((1 << (W-1)) - 1); s[i] = W'(-(1 << (W-1))); end
          2: begin u[i] = W'(-1); s[i] = W'(i); end
          default: begin u[i] = W'($urandom); s[i] = W'($urandom); end
        endcase
      end
      #1;
      for (int i = 0; i < int'(K); i++) begin
        checks++;
        if (longint'(p[i]) != longint'(u[i]) * longint'(s[i])) begin
          failures++;
          if (failures < 10) $display("t=%0d i=%0d: %0d * %0d gave %0d", t, i, u[i], s[i], p[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
