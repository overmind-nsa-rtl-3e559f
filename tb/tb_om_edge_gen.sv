// tb_om_edge_gen: self-checking test of the SRAM address generator.
// A memory model here returns f(addr) = 3*addr + 7 one cycle after each read.
// For row-major and column-major walks, with and without the idle slot after
// every element, the test checks every broadcast word (tag, data, segment),
// the visiting order, and the number of cycles the walk takes.
module tb_om_edge_gen;
  import om_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, col_major, issue_2, re, b_valid, busy;
  addr_t base, stride, raddr;
  tag_t nlines, len, b_line, b_col, seg_lo, seg_hi;
  word_t rdata, b_data;
  om_edge_gen dut (.*);

  always_ff @(posedge clk) if (re) rdata <= word_t'(3 * raddr + 7);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic walk(int b, int st, int nl, int ln, bit cm, bit i2);
    int k, t0, first, last_c;
    base = addr_t'(b); stride = addr_t'(st); nlines = tag_t'(nl); len = tag_t'(ln);
    col_major = cm; issue_2 = i2;
    start = 1; @(posedge clk) #1; start = 0;
    t0 = cycle;
    k = 0; first = -1; last_c = 0;
    while (busy) begin
      @(negedge clk);
      if (b_valid) begin
        int l, c;
        l = cm ? (k % nl) : (k / ln);
        c = cm ? (k / nl) : (k % ln);
        if (first < 0) first = cycle - t0;
        last_c = cycle - t0;
        check("line", b_line, l);
        check("col", b_col, c);
        check("data", b_data, 3 * (b + l * st + c) + 7);
        check("seg_lo", seg_lo, cm ? 0 : l);
        check("seg_hi", seg_hi, cm ? nl - 1 : l);
        k++;
      end
      @(posedge clk) #1;
    end
    check("count", k, nl * ln);
    check("first word", first, 1);
    check("duration", last_c - first, (nl * ln - 1) * (i2 ? 2 : 1));
  endtask

  initial begin
    start = 0; col_major = 0; issue_2 = 0; base = 0; stride = 0; nlines = 0; len = 0;
    repeat (2) @(posedge clk) #1;
    rst_n = 1;
    @(posedge clk) #1;
    walk(100, 20, 4, 13, 0, 0);
    walk(7, 16, 5, 16, 1, 0);
    walk(300, 9, 1, 7, 1, 1);
    walk(0, 32, 3, 32, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
