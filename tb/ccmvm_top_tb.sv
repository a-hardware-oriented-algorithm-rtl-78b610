// ccmvm_top_tb: end-to-end test of the complex constant matrix-vector
// multiplier at its default size (N = 4 inputs, M = 3 outputs, 16-bit data,
// default constant matrix), with no parameter overridden.
//
// A stream of input vectors is applied with in_valid patterns that include
// back-to-back vectors and bubbles. Every result is compared with the
// schoolbook product y_m = sum_n a_{m,n} x_n computed here in 64-bit integer
// arithmetic, and the latency is checked: a vector presented in cycle t
// must come out, with out_valid, in cycle t+3. Vectors
// include all-zero inputs (where the c_m and xi corrections must cancel the
// Winograd cross terms exactly) and full-scale inputs (largest magnitudes).
// Each of these situations is counted and must occur at least once.
module ccmvm_top_tb;
  import ccmvm_pkg::*;

  localparam int unsigned N = DEF_N, M = DEF_M, W = DEF_W;
  localparam int unsigned YW = 2 * (W + 2) + $clog2(N / 2) + 1;
  localparam int LATENCY = 3;
  localparam int NVEC = 2000;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [W-1:0]  x_re [N], x_im [N];
  logic                 out_valid;
  logic signed [YW-1:0] y_re [M], y_im [M];

  ccmvm_top dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    int     cyc;
    longint yr [M];
    longint yi [M];
  } expect_t;
  expect_t q[$];

  int checks = 0, failures = 0, cyc = 0;
  int n_back_to_back = 0, n_bubble = 0, n_zero = 0, n_full_scale = 0;
  int n_neg = 0, n_pos = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (NVEC * 3 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint a(int m, int n, int part);
    return demo_coef(m, n, part, int'(W));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("cycle %0d: %s", cyc, what);
    end
  endtask

  // output side: compare at every negedge where out_valid is high
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      expect_t e;
      if (q.size() == 0) begin
        check(1'b0, "out_valid with no vector in flight");
      end else begin
        e = q.pop_front();
        check(cyc - e.cyc == LATENCY, $sformatf("latency %0d", cyc - e.cyc));
        for (int m = 0; m < int'(M); m++) begin
          check(longint'(y_re[m]) == e.yr[m], $sformatf("y_re[%0d] %0d != %0d", m, y_re[m], e.yr[m]));
          check(longint'(y_im[m]) == e.yi[m], $sformatf("y_im[%0d] %0d != %0d", m, y_im[m], e.yi[m]));
          if (e.yr[m] < 0) n_neg++; else if (e.yr[m] > 0) n_pos++;
        end
      end
    end
  end

  initial begin
    int sent;
    bit prev_valid;
    for (int n = 0; n < int'(N); n++) begin x_re[n] = '0; x_im[n] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    sent = 0;
    prev_valid = 1'b0;
    while (sent < NVEC) begin
      @(negedge clk);
      // valid pattern: first 50 back to back, then about one bubble in three
      in_valid = (sent < 50) ? 1'b1 : ($urandom_range(0, 2) != 0);
      if (in_valid) begin
        expect_t e;
        int kind;
        kind = (sent == 3 || sent == 60) ? 1 : (sent == 4 || sent == 61) ? 2 : 0;
        for (int n = 0; n < int'(N); n++) begin
          case (kind)
            1: begin x_re[n] = '0; x_im[n] = '0; end
            2: begin x_re[n] = W'(-(1 << (W-1))); x_im[n] = W'(-(1 << (W-1))); end
            default: begin x_re[n] = W'($urandom); x_im[n] = W'($urandom); end
          endcase
        end
        if (kind == 1) n_zero++;
        if (kind == 2) n_full_scale++;
        e.cyc = cyc;
        for (int m = 0; m < int'(M); m++) begin
          e.yr[m] = 0;
          e.yi[m] = 0;
          for (int n = 0; n < int'(N); n++) begin
            e.yr[m] += a(m, n, 0) * longint'(x_re[n]) - a(m, n, 1) * longint'(x_im[n]);
            e.yi[m] += a(m, n, 0) * longint'(x_im[n]) + a(m, n, 1) * longint'(x_re[n]);
          end
        end
        q.push_back(e);
        if (prev_valid) n_back_to_back++;
        sent++;
      end else begin
        if (prev_valid) n_bubble++;
        for (int n = 0; n < int'(N); n++) begin x_re[n] = W'($urandom); x_im[n] = W'($urandom); end
      end
      prev_valid = in_valid;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LATENCY + 2) @(negedge clk);
    check(q.size() == 0, "vectors lost in the pipeline");
    $display("vectors %0d, back-to-back %0d, bubbles %0d, zero %0d, full-scale %0d, y<0 %0d, y>0 %0d",
             sent, n_back_to_back, n_bubble, n_zero, n_full_scale, n_neg, n_pos);
    check(n_back_to_back > 0, "no back-to-back vectors");
    check(n_bubble > 0,       "no bubble");
    check(n_zero > 0,         "no zero vector");
    check(n_full_scale > 0,   "no full-scale vector");
    check(n_neg > 0 && n_pos > 0, "results of one sign only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
