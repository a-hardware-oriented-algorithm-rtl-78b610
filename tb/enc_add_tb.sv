// enc_add_tb: self-checking test of enc_add (constant "encoder" adders).
// Drives random and extreme input components against a fixed constant
// super-vector and checks every output against CONST[i] + x[routed index],
// with the routing P = I_{N/2} (x) (1_{Mx1} (x) I_2) worked out here from
// the index arithmetic (entry i -> pair i / 2M, part i mod 2).
module enc_add_tb;
  localparam int unsigned N = 4, M = 3, W = 16;

  function automatic logic [M*N*W-1:0] make_const();
    logic [M*N*W-1:0] v;
    for (int i = 0; i < int'(M*N); i++) v[i*W +: W] = W'((i * 7919 + 12345) ^ (i << 11));
    return v;
  endfunction
  localparam logic [M*N*W-1:0] CONST = make_const();

  logic signed [W-1:0] x [N];
  logic signed [W:0]   e [M*N];
  int checks = 0, failures = 0;

  enc_add #(.N(N), .M(M), .W(W), .CONST(CONST)) dut (.x(x), .e(e));

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
          0: x[n] = W'(-(1 << (W-1)));
          1: x[n] = W'((1 << (W-1)) - 1);
          default: x[n] = W'($urandom);
        endcase
      end
      #1;
      for (int i = 0; i < int'(M*N); i++) begin
        longint exp_v;
        int src;
        src = 2 * (i / (2*M)) + (i % 2);
        exp_v = longint'(signed'(CONST[i*W +: W])) + longint'(x[src]);
        checks++;
        if (longint'(e[i]) != exp_v) begin
          failures++;
          if (failures < 10) $display("mismatch t=%0d i=%0d got %0d exp %0d", t, i, e[i], exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
