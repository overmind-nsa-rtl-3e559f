// tb_om_pe_row: self-checking test of one PE row with its divider.
// Drives the row's window-side input directly and checks:
//   LOADW + GEMM     out[c] = sum_k x[k] * W[k][c] on the enabled columns only
//   LOADV + CCONV    out[i] = sum_j A[j] * B[(i-j) mod N] for N = 16 and N = 8
//   LOADV + ELEM     every element-wise function
//   LOADC + PADE     exp(x) through its [3/3] Pade approximant: bit-exact
//                    against a fixed-point model of the chains and divider,
//                    within 0.01 of the real exp(x), and the latency
//                    2*m + DIV_LATENCY; then random order-6 coefficients.
module tb_om_pe_row;
  import om_pkg::*;
  localparam int C = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  op_e op; fn_e fn; logic [3:0] order; logic [5:0] ncols; logic [C-1:0] col_en;
  logic clear, s_valid; word_t s_data; tag_t s_li, s_lj;
  logic res_valid; word_t res_data; tag_t res_tag;
  word_t acc [C]; logic busy;

  om_pe_row #(.COLS(C), .RGF_DEPTH(16)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  function automatic longint sat32(longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction
  function automatic longint qmul(longint a, longint b); return sat32((a * b) >>> 16); endfunction
  function automatic longint qdiv(longint n, longint d);
    if (d == 0) return (n < 0) ? -64'sd2147483648 : 64'sd2147483647;
    return sat32((n * 65536) / d);
  endfunction

  // all stimulus changes one time unit after the rising edge
  task automatic send(tag_t li, tag_t lj, word_t d);
    s_valid = 1; s_li = li; s_lj = lj; s_data = d;
    @(posedge clk) #1;
  endtask
  // end of a burst
  task automatic idle();
    s_valid = 0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Pade result capture
  longint res_by_tag [64];
  int     res_cycle [64];
  int     nres = 0;
  always @(negedge clk) if (rst_n && res_valid) begin
    res_by_tag[int'(res_tag)] = longint'(res_data);
    res_cycle[int'(res_tag)]  = cycle;
    nres++;
  end

  longint W [16][C];
  longint A [C], B [C], X [C];
  longint coef [13];

  task automatic pade_run(int m, int n_el, longint xs [64], bit check_real);
    int in_cycle [64];
    // coefficients a0..am, b1..bm
    op = OP_LOADC; order = 4'(m); col_en = C'((1 << (2*m)) - 1);
    for (int j = 0; j <= 2*m; j++) send('0, tag_t'(j), word_t'(coef[j]));
    idle();
    op = OP_PADE;
    @(posedge clk) #1;
    nres = 0;
    for (int e = 0; e < n_el; e++) begin
      @(negedge clk) in_cycle[e] = cycle;
      send('0, tag_t'(e), word_t'(xs[e]));
      idle();
      @(posedge clk) #1;                 // one element every second cycle
    end
    while (busy) @(posedge clk) #1;
    repeat (2) @(posedge clk) #1;
    check("pade count", nres, n_el);
    for (int e = 0; e < n_el; e++) begin
      longint p, sn, sd, x;
      x = xs[e]; p = 65536; sn = coef[0]; sd = 65536;
      for (int k = 1; k <= m; k++) begin
        p  = qmul(p, x);
        sn = sat32(sn + qmul(coef[k], p));
        sd = sat32(sd + qmul(coef[m+k], p));
      end
      check($sformatf("pade m=%0d x=%0d", m, x), res_by_tag[e], qdiv(sn, sd));
      check("pade latency", res_cycle[e] - in_cycle[e], 2*m + DIV_LATENCY);
      if (check_real) begin
        real xr, yr;
        xr = real'(x) / 65536.0;
        yr = real'(res_by_tag[e]) / 65536.0;
        checks++;
        if (yr - $exp(xr) > 0.01 || $exp(xr) - yr > 0.01) begin
          failures++; $display("FAIL exp(%f) = %f, approximation %f", xr, $exp(xr), yr);
        end
      end
    end
  endtask

  initial begin
    longint xs [64];
    op = OP_NOP; fn = FN_ADD; order = 0; ncols = 0; col_en = '0; clear = 0;
    s_valid = 0; s_data = 0; s_li = 0; s_lj = 0;
    repeat (3) @(posedge clk) #1;
    rst_n = 1;
    @(posedge clk) #1;

    // ---------------------------------------------------------------- GEMM
    op = OP_LOADW;
    for (int k = 0; k < 16; k++)
      for (int c = 0; c < C; c++) begin
        W[k][c] = $signed(8'($urandom));
        send(tag_t'(k), tag_t'(c), word_t'(W[k][c]));
      end
    idle();
    op = OP_GEMM; ncols = 12; col_en = C'(12'hFFF);
    clear = 1; @(posedge clk) #1; clear = 0;
    for (int k = 0; k < 16; k++) begin X[k] = $signed(8'($urandom)); send('0, tag_t'(k), word_t'(X[k])); end
    idle();
    @(posedge clk) #1;
    for (int c = 0; c < C; c++) begin
      automatic longint e = 0;
      if (c < 12) for (int k = 0; k < 16; k++) e += X[k] * W[k][c];
      check($sformatf("gemm col %0d", c), longint'(acc[c]), e);
    end

    // ---------------------------------------------------------------- circular convolution
    for (int n = 16; n >= 8; n -= 8) begin
      op = OP_LOADV;
      for (int j = 0; j < n; j++) begin A[j] = $signed(8'($urandom)); send('0, tag_t'(j), word_t'(A[j])); end
    idle();
      op = OP_CCONV; ncols = 6'(n); col_en = C'((32'd1 << n) - 1);
      clear = 1; @(posedge clk) #1; clear = 0;
      for (int j = 0; j < n; j++) begin B[j] = $signed(8'($urandom)); send('0, tag_t'(j), word_t'(B[j])); end
    idle();
      @(posedge clk) #1;
      for (int i = 0; i < n; i++) begin
        automatic longint e = 0;
        for (int j = 0; j < n; j++) e += A[j] * B[(i - j + n) % n];
        check($sformatf("cconv N=%0d out %0d", n, i), longint'(acc[i]), e);
      end
    end

    // ---------------------------------------------------------------- element-wise
    op = OP_LOADV;
    for (int j = 0; j < C; j++) begin A[j] = $signed(8'($urandom)); send('0, tag_t'(j), word_t'(A[j])); end
    idle();
    for (int f = 0; f < 6; f++) begin
      op = OP_ELEM; fn = fn_e'(f); ncols = C; col_en = '1;
      clear = 1; @(posedge clk) #1; clear = 0;
      for (int j = 0; j < C; j++) begin X[j] = $signed(8'($urandom)); send('0, tag_t'(j), word_t'(X[j])); end
    idle();
      @(posedge clk) #1;
      for (int j = 0; j < C; j++) begin
        longint e;
        case (f)
          0: e = A[j] + X[j];
          1: e = A[j] - X[j];
          2: e = A[j] * X[j];
          3: e = (X[j] > A[j]) ? X[j] : A[j];
          4: e = (X[j] < A[j]) ? X[j] : A[j];
          default: e = (X[j] > 0) ? X[j] : 0;
        endcase
        check($sformatf("elem fn%0d j%0d", f, j), longint'(acc[j]), e);
      end
    end

    // ---------------------------------------------------------------- Pade: exp [3/3]
    coef[0] = 65536;                 // a0 = 1
    coef[1] = 32768;                 // a1 = 1/2
    coef[2] = 6554;                  // a2 = 1/10
    coef[3] = 546;                   // a3 = 1/120
    coef[4] = -32768;                // b1 = -1/2
    coef[5] = 6554;                  // b2 = 1/10
    coef[6] = -546;                  // b3 = -1/120
    for (int e = 0; e < 21; e++) xs[e] = (e - 10) * 6554;   // -1.0 .. 1.0
    pade_run(3, 21, xs, 1'b1);

    // ---------------------------------------------------------------- Pade: random order 6
    for (int j = 0; j <= 12; j++) coef[j] = $signed(32'($urandom_range(0, 65536))) - 32768;
    for (int e = 0; e < 20; e++) xs[e] = $signed(32'($urandom_range(0, 4 * 65536))) - 2 * 65536;
    pade_run(6, 20, xs, 1'b0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
