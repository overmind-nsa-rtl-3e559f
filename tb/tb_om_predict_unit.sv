// tb_om_predict_unit: self-checking test of the task placement unit.
// Reproduces the four tasks of the array-occupancy illustration (Pade 5 x 2,
// Pade 4 x 2, GEMM 12 x 1, circular convolution 16 x 3) and random tasks,
// and checks COL, ROW, the masks, FULL and the fit flag, and that outputs
// hold between loads.
module tb_om_predict_unit;
  import om_pkg::*;
  localparam int R = 32, C = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load, full, fits;
  instr_t instr;
  logic [6:0] col_cnt, row_cnt;
  logic [C-1:0] col_mask;
  logic [R-1:0] row_mask;
  om_predict_unit #(.ROWS(R), .COLS(C)) dut (.*);

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

  task automatic run(op_e op, int order, int cols, int rows, string what);
    int ec;
    instr = '0; instr.op = op; instr.order = 4'(order); instr.cols = 6'(cols); instr.rows = 7'(rows);
    load = 1; @(posedge clk) #1; load = 0;
    ec = (op == OP_PADE) ? 2 * order : cols;
    check({what, " COL"}, col_cnt, ec);
    check({what, " ROW"}, row_cnt, rows);
    check({what, " FULL"}, full, rows >= R);
    check({what, " fits"}, fits, rows <= R && ec <= C);
    for (int c = 0; c < C; c++) check({what, " colmask"}, col_mask[c], c < ec);
    for (int r = 0; r < R; r++) check({what, " rowmask"}, row_mask[r], r < rows);
    // hold
    instr.rows = 7'd1;
    @(posedge clk) #1;
    check({what, " hold"}, row_cnt, rows);
  endtask

  initial begin
    load = 0; instr = '0;
    repeat (2) @(posedge clk) #1;
    rst_n = 1;
    run(OP_PADE, 5, 0, 2, "A1 pade5x2");
    run(OP_PADE, 4, 0, 2, "A2 pade4x2");
    run(OP_GEMM, 0, 12, 1, "B1 gemm12x1");
    run(OP_CCONV, 0, 16, 3, "B2 cconv16x3");
    run(OP_GEMM, 0, 16, 32, "full gemm");
    run(OP_PADE, 9, 0, 4, "too wide");
    run(OP_ELEM, 0, 8, 40, "too tall");
    for (int i = 0; i < 40; i++)
      run(($urandom_range(0, 1) == 1) ? OP_GEMM : OP_PADE, $urandom_range(1, 8),
          $urandom_range(1, 16), $urandom_range(1, 32), "random");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
