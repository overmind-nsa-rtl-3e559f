// tb_om_pe: self-checking test of one PE.
// Loads the register file and the coefficient register, then checks MAC
// accumulation with remapped register-file indices, every element-wise
// function, and the Pade chain stage (x^k = x^(k-1)*x, s + a*x^k) including
// its two-cycle latency and saturation, against a reference model written
// here with 64-bit integer arithmetic.
module tb_om_pe;
  import om_pkg::*;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0] mode; fn_e fn; logic clear;
  logic rgf_we; logic [3:0] rgf_waddr; word_t rgf_wdata;
  logic a_we; word_t a_wdata;
  logic in_valid; word_t in_x; logic [3:0] in_ridx;
  logic ch_valid; word_t ch_x, ch_pow, ch_sum; tag_t ch_tag;
  logic ch_valid_o; word_t ch_x_o, ch_pow_o, ch_sum_o; tag_t ch_tag_o;
  logic busy; word_t acc;

  om_pe #(.RGF_DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  word_t ref_rgf [D];

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic longint sat32(longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction
  function automatic longint qmul(longint a, longint b);
    return sat32((a * b) >>> 16);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint racc;
    mode = 0; fn = FN_ADD; clear = 0; rgf_we = 0; rgf_waddr = 0; rgf_wdata = 0;
    a_we = 0; a_wdata = 0; in_valid = 0; in_x = 0; in_ridx = 0;
    ch_valid = 0; ch_x = 0; ch_pow = 0; ch_sum = 0; ch_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // load register file with INT8 values
    for (int i = 0; i < D; i++) begin
      ref_rgf[i] = word_t'($signed(8'($urandom)));
      rgf_we <= 1; rgf_waddr <= 4'(i); rgf_wdata <= ref_rgf[i];
      @(posedge clk);
    end
    rgf_we <= 0;
    // ---------------- MAC
    clear <= 1; @(posedge clk); clear <= 0;
    mode <= 2'd1;
    racc = 0;
    for (int k = 0; k < 40; k++) begin
      word_t x; int idx;
      x = word_t'($signed(8'($urandom)));
      idx = $urandom_range(0, D-1);
      in_valid <= 1; in_x <= x; in_ridx <= 4'(idx);
      @(posedge clk);
      racc = racc + longint'(x) * longint'(ref_rgf[idx]);
    end
    in_valid <= 0;
    @(posedge clk);
    check("mac acc", longint'(acc), longint'(int'(racc)));
    // idle input must not change the accumulator
    repeat (3) @(posedge clk);
    check("mac hold", longint'(acc), longint'(int'(racc)));
    // ---------------- element-wise
    mode <= 2'd2;
    for (int f = 0; f < 6; f++) begin
      for (int k = 0; k < 8; k++) begin
        word_t x; int idx; longint e; longint v;
        x = word_t'($signed(8'($urandom)));
        idx = $urandom_range(0, D-1);
        v = longint'(ref_rgf[idx]);
        fn <= fn_e'(f); in_valid <= 1; in_x <= x; in_ridx <= 4'(idx);
        @(posedge clk);
        in_valid <= 0;
        @(negedge clk);
        case (f)
          0: e = v + x;
          1: e = v - x;
          2: e = v * x;
          3: e = (x > v) ? x : v;
          4: e = (x < v) ? x : v;
          default: e = (x > 0) ? x : 0;
        endcase
        check($sformatf("elem fn%0d", f), longint'(acc), e);
      end
    end
    // ---------------- Pade chain stage
    mode <= 2'd3;
    clear <= 1; @(posedge clk); clear <= 0;
    for (int k = 0; k < 30; k++) begin
      longint a, x, p, s, ep, es; int lat;
      a = $signed(32'($urandom_range(0, 4*65536))) - 2*65536;
      x = $signed(32'($urandom_range(0, 8*65536))) - 4*65536;
      p = (k == 0) ? 64'sd65536 : $signed(32'($urandom_range(0, 16*65536))) - 8*65536;
      s = $signed(32'($urandom_range(0, 16*65536))) - 8*65536;
      if (k == 29) begin p = 64'sd2000000000; x = 64'sd2000000000; end  // saturation
      a_we <= 1; a_wdata <= word_t'(a); @(posedge clk); a_we <= 0;
      ch_valid <= 1; ch_x <= word_t'(x); ch_pow <= word_t'(p); ch_sum <= word_t'(s);
      ch_tag <= tag_t'(k);
      @(posedge clk);
      ch_valid <= 0;
      lat = 0;
      do begin @(negedge clk); lat++; end while (!ch_valid_o && lat < 10);
      ep = qmul(p, x);
      es = sat32(s + qmul(a, ep));
      check("pade latency", lat, 2);
      check("pade pow", longint'(ch_pow_o), ep);
      check("pade sum", longint'(ch_sum_o), es);
      check("pade x", longint'(ch_x_o), x);
      check("pade tag", longint'(ch_tag_o), k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
