// tb_om_dual_window: self-checking test of the per-row dual-window filter
// (row 3 of the array).  Checks that a pre-loaded window stays in the shadow
// registers until swap, that only tags inside both the line window and the
// column window pass, with the right local coordinates, for per-row and shared
// windows, that rows beyond the task's row count stay off, and the row-enable
// intersection with the broadcast segment.
module tb_om_dual_window;
  import om_pkg::*;
  localparam int R = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pre_valid, swap, b_valid, row_en, s_valid;
  instr_t pre_instr;
  tag_t b_line, b_col, seg_lo, seg_hi, s_li, s_lj;
  om_dual_window #(.ROW_IDX(R)) dut (.*);

  int checks = 0, failures = 0;
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

  // sweep all tags of a 12 x 20 region and compare with the expected window
  task automatic sweep(bit en, int l0, int l1, int c1, string what);
    for (int l = 0; l < 12; l++) begin
      for (int c = 0; c < 20; c++) begin
        bit exp_v;
        b_valid = 1; b_line = tag_t'(l); b_col = tag_t'(c);
        seg_lo = tag_t'(l); seg_hi = tag_t'(l);
        #1;
        exp_v = en && l >= l0 && l <= l1 && c <= c1;
        check({what, " valid"}, s_valid, exp_v);
        check({what, " row_en"}, row_en, en && l >= l0 && l <= l1);
        if (exp_v) begin
          check({what, " li"}, s_li, l - l0);
          check({what, " lj"}, s_lj, c);
        end
      end
    end
    b_valid = 0;
  endtask

  initial begin
    pre_valid = 0; swap = 0; b_valid = 0; b_line = 0; b_col = 0; seg_lo = 0; seg_hi = 0;
    pre_instr = '0;
    repeat (2) @(posedge clk) #1;
    rst_n = 1;
    // after reset the row is off
    sweep(0, 0, 0, 0, "reset");
    // per-row window: GEMM on 8 rows, 10 elements per line -> row 3 takes line 3
    pre_instr.op = OP_GEMM; pre_instr.rows = 8; pre_instr.nlines = 8; pre_instr.len = 10;
    pre_valid = 1; @(posedge clk) #1; pre_valid = 0;
    sweep(0, 0, 0, 0, "shadow only");        // not active before swap
    swap = 1; @(posedge clk) #1; swap = 0;
    sweep(1, R, R, 9, "gemm");
    // pre-decode a shared-window load while the GEMM window is active
    pre_instr.op = OP_LOADW; pre_instr.rows = 4; pre_instr.nlines = 6; pre_instr.len = 16;
    pre_valid = 1; @(posedge clk) #1; pre_valid = 0;
    sweep(1, R, R, 9, "gemm kept");
    swap = 1; @(posedge clk) #1; swap = 0;
    sweep(1, 0, 5, 15, "loadw");
    // too few rows: row 3 is switched off
    pre_instr.op = OP_PADE; pre_instr.rows = 3; pre_instr.nlines = 3; pre_instr.len = 20;
    pre_valid = 1; @(posedge clk) #1; pre_valid = 0; swap = 1; @(posedge clk) #1; swap = 0;
    sweep(0, 0, 0, 0, "rows=3");
    // segment intersection: row 3 (line 3) with column-major segments
    pre_instr.rows = 8; pre_instr.nlines = 8;
    pre_valid = 1; @(posedge clk) #1; pre_valid = 0; swap = 1; @(posedge clk) #1; swap = 0;
    for (int lo = 0; lo < 8; lo++)
      for (int hi = lo; hi < 8; hi++) begin
        seg_lo = tag_t'(lo); seg_hi = tag_t'(hi); #1;
        check("segment", row_en, (lo <= R) && (hi >= R));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
