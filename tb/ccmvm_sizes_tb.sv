// ccmvm_sizes_tb: the multiplier at other sizes and at the numeric limits.
//  - dut_ext: default size (N = 4, M = 3, W = 16) with every constant at
//    -2^15 (the largest magnitude), fed with full-scale and random inputs;
//    this exercises the widest intermediate values and shows the result
//    width never wraps.
//  - dut_big: N = 8, M = 5, W = 12 with random-looking constants, showing
//    the structure for a larger matrix and more terms per N/2-input adder.
// Both are streamed one vector per clock and compared with the schoolbook
// product computed here; the latency must be 3 cycles.
module ccmvm_sizes_tb;
  localparam int LATENCY = 3;
  localparam int NVEC = 500;

  localparam int unsigned N1 = 4, M1 = 3, W1 = 16;
  localparam int unsigned YW1 = 2 * (W1 + 2) + $clog2(N1 / 2) + 1;
  localparam int unsigned N2 = 8, M2 = 5, W2 = 12;
  localparam int unsigned YW2 = 2 * (W2 + 2) + $clog2(N2 / 2) + 1;

  function automatic int coef2(int m, int n, int part);
    return ((m * 1543 + n * 691 + part * 2011 + 3) % 4096) - 2048;
  endfunction
  function automatic logic [M2*N2*W2-1:0] make_a2(int part);
    logic [M2*N2*W2-1:0] v;
    for (int m = 0; m < int'(M2); m++)
      for (int n = 0; n < int'(N2); n++)
        v[(m*N2+n)*W2 +: W2] = W2'(coef2(m, n, part));
    return v;
  endfunction
  localparam logic [M1*N1*W1-1:0] AEXT = {(M1*N1){1'b1, {(W1-1){1'b0}}}};

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [W1-1:0]  xa_re [N1], xa_im [N1];
  logic signed [W2-1:0]  xb_re [N2], xb_im [N2];
  logic                  va, vb;
  logic signed [YW1-1:0] ya_re [M1], ya_im [M1];
  logic signed [YW2-1:0] yb_re [M2], yb_im [M2];

  ccmvm_top #(.N(N1), .M(M1), .W(W1), .A_RE(AEXT), .A_IM(AEXT)) dut_ext (
    .clk, .rst_n, .in_valid, .x_re(xa_re), .x_im(xa_im),
    .out_valid(va), .y_re(ya_re), .y_im(ya_im));

  ccmvm_top #(.N(N2), .M(M2), .W(W2), .A_RE(make_a2(0)), .A_IM(make_a2(1))) dut_big (
    .clk, .rst_n, .in_valid, .x_re(xb_re), .x_im(xb_im),
    .out_valid(vb), .y_re(yb_re), .y_im(yb_im));

  always #5 clk = ~clk;

  typedef struct {
    int     cyc;
    longint ar [M1];
    longint ai [M1];
    longint br [M2];
    longint bi [M2];
  } expect_t;
  expect_t q[$];

  int checks, failures, cyc;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (NVEC + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("cycle %0d: %s", cyc, what);
    end
  endtask

  always @(negedge clk) begin
    if (rst_n && (va || vb)) begin
      expect_t e;
      check(va && vb, "out_valid differs between the two instances");
      if (q.size() == 0) check(1'b0, "out_valid with no vector in flight");
      else begin
        e = q.pop_front();
        check(cyc - e.cyc == LATENCY, $sformatf("latency %0d", cyc - e.cyc));
        for (int m = 0; m < int'(M1); m++) begin
          check(longint'(ya_re[m]) == e.ar[m], $sformatf("ext y_re[%0d] %0d != %0d", m, ya_re[m], e.ar[m]));
          check(longint'(ya_im[m]) == e.ai[m], $sformatf("ext y_im[%0d] %0d != %0d", m, ya_im[m], e.ai[m]));
        end
        for (int m = 0; m < int'(M2); m++) begin
          check(longint'(yb_re[m]) == e.br[m], $sformatf("big y_re[%0d] %0d != %0d", m, yb_re[m], e.br[m]));
          check(longint'(yb_im[m]) == e.bi[m], $sformatf("big y_im[%0d] %0d != %0d", m, yb_im[m], e.bi[m]));
        end
      end
    end
  end

  initial begin
    checks = 0; failures = 0; cyc = 0;
    for (int n = 0; n < int'(N1); n++) begin xa_re[n] = '0; xa_im[n] = '0; end
    for (int n = 0; n < int'(N2); n++) begin xb_re[n] = '0; xb_im[n] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NVEC; t++) begin
      expect_t e;
      longint aext;
      @(negedge clk);
      in_valid = 1'b1;
      for (int n = 0; n < int'(N1); n++) begin
        case (t % 4)
          0: begin xa_re[n] = W1'(-(1 << (W1-1))); xa_im[n] = W1'(-(1 << (W1-1))); end
          1: begin xa_re[n] = W1'(-(1 << (W1-1))); xa_im[n] = W1'((1 << (W1-1)) - 1); end
          default: begin xa_re[n] = W1'($urandom); xa_im[n] = W1'($urandom); end
        endcase
      end
      for (int n = 0; n < int'(N2); n++) begin xb_re[n] = W2'($urandom); xb_im[n] = W2'($urandom); end
      aext = -(longint'(1) << (W1 - 1));
      e.cyc = cyc;
      for (int m = 0; m < int'(M1); m++) begin
        e.ar[m] = 0; e.ai[m] = 0;
        for (int n = 0; n < int'(N1); n++) begin
          e.ar[m] += aext * longint'(xa_re[n]) - aext * longint'(xa_im[n]);
          e.ai[m] += aext * longint'(xa_im[n]) + aext * longint'(xa_re[n]);
        end
      end
      for (int m = 0; m < int'(M2); m++) begin
        e.br[m] = 0; e.bi[m] = 0;
        for (int n = 0; n < int'(N2); n++) begin
          e.br[m] += longint'(coef2(m, n, 0)) * longint'(xb_re[n]) - longint'(coef2(m, n, 1)) * longint'(xb_im[n]);
          e.bi[m] += longint'(coef2(m, n, 0)) * longint'(xb_im[n]) + longint'(coef2(m, n, 1)) * longint'(xb_re[n]);
        end
      end
      q.push_back(e);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LATENCY + 2) @(negedge clk);
    check(q.size() == 0, "vectors lost in the pipeline");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
