// tb_om_divider: self-checking test of the pipelined fixed-point divider.
// Feeds one division per cycle (random operands, corner cases: zero and
// negative denominators, saturation, most negative numerator) and checks
// every quotient against (num * 2^FRAC) / den computed here with 64-bit
// integers, its tag, and that it appears exactly DIV_LATENCY cycles later.
module tb_om_divider;
  import om_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  word_t num, den, quot;
  tag_t in_tag, out_tag;
  om_divider dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  localparam int N = 300;
  longint exp_q [N];
  int     in_cycle [N];
  int     got = 0;

  function automatic longint ref_div(longint n, longint d);
    longint q;
    if (d == 0) return (n < 0) ? -64'sd2147483648 : 64'sd2147483647;
    q = (n * 65536) / d;
    if (q > 64'sd2147483647) q = 64'sd2147483647;
    if (q < -64'sd2147483648) q = -64'sd2147483648;
    return q;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input cycle recorder and checker (both sample between clock edges)
  always @(negedge clk) if (rst_n && in_valid) in_cycle[int'(in_tag)] = cycle;

  always @(negedge clk) if (rst_n && out_valid) begin
    int t;
    t = int'(out_tag);
    checks += 3;
    if (longint'(quot) != exp_q[t]) begin
      failures++;
      $display("FAIL quot tag %0d: got %0d expected %0d", t, quot, exp_q[t]);
    end
    if (t != got) begin failures++; $display("FAIL order: tag %0d expected %0d", t, got); end
    if (cycle - in_cycle[t] != DIV_LATENCY) begin
      failures++;
      $display("FAIL latency %0d expected %0d", cycle - in_cycle[t], DIV_LATENCY);
    end
    got++;
  end

  initial begin
    in_valid = 0; num = 0; den = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      longint n, d;
      n = $signed(32'($urandom_range(0, 32'h00FF_FFFF))) - 32'sh0080_0000;
      d = $signed(32'($urandom_range(0, 32'h0003_FFFF))) - 32'sh0002_0000;
      case (i)
        0: begin n = 65536; d = 131072; end          // 1 / 2
        1: begin n = -3 * 65536; d = 65536; end      // -3 / 1
        2: begin n = 5 * 65536; d = 0; end           // / 0
        3: begin n = -5; d = 0; end
        4: begin n = 64'sd2147483647; d = 1; end     // saturates
        5: begin n = -64'sd2147483648; d = 1; end
        6: begin n = -64'sd2147483648; d = -64'sd2147483648; end
        7: begin n = 7; d = -3; end
        default: if (i % 7 == 0) d = $signed(32'($urandom_range(0, 200))) - 100;
      endcase
      exp_q[i] = ref_div(n, d);
      in_valid <= 1; num <= word_t'(n); den <= word_t'(d); in_tag <= tag_t'(i);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (DIV_LATENCY + 5) @(posedge clk);
    checks++;
    if (got != N) begin failures++; $display("FAIL only %0d results", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
