// tb_om_controller: self-checking test of the instruction sequencer.
// The edge generator, the rows and the DMA engine are modelled here by
// busy signals of known length.  Checks: the START strobes, the drain
// address sequence dst_base + r * dst_stride + c, pre-decoding of the next
// instruction while the current one runs (and the gap it saves), background
// DMA launch, WAIT holding the queue until the DMA is idle, refusal of a task
// that does not fit, and queue back-pressure.
module tb_om_controller;
  import om_pkg::*;
  localparam int R = 32, C = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, pre_valid, swap, pu_load, clear, eg_start, eg_col_major, eg_issue_2;
  logic eg_busy, rows_busy, dr_valid, dma_start, dma_busy, idle;
  instr_t in_instr, cur, pre_instr, pu_instr, dma_instr;
  logic [4:0] dr_row; logic [3:0] dr_col;
  addr_t dr_addr;
  logic [31:0] done_cnt, err_cnt, preload_cnt;
  om_controller #(.ROWS(R), .COLS(C), .QDEPTH(4)) dut (.*);

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

  // models: edge generator busy for EG_LEN cycles after start, rows busy 5 more
  // cycles for Pade, DMA busy for 80 cycles after its start
  localparam int EG_LEN = 20;
  int eg_left = 0, rows_left = 0, dma_left = 0;
  op_e started_op;
  always @(posedge clk) begin
    if (eg_start) begin eg_left <= EG_LEN; started_op <= pu_instr.op; end
    else if (eg_left > 0) begin
      eg_left <= eg_left - 1;
      if (eg_left == 1 && started_op == OP_PADE) rows_left <= 5;
    end
    if (rows_left > 0 && !(eg_left == 1)) rows_left <= rows_left - 1;
    if (dma_start) dma_left <= 80; else if (dma_left > 0) dma_left <= dma_left - 1;
  end
  assign eg_busy   = (eg_left > 0);
  assign rows_busy = (rows_left > 0);
  assign dma_busy  = (dma_left > 0);

  // event log
  int starts [$], dones [$], drains = 0;
  int exp_addr [$];
  always @(negedge clk) if (rst_n) begin
    if (eg_start) begin
      starts.push_back(cycle);
      checks += 3;
      if (!(swap && pu_load)) begin failures++; $display("FAIL start strobes"); end
      if (clear != op_drains(pu_instr.op)) begin failures++; $display("FAIL clear"); end
      if (eg_col_major != (pu_instr.op == OP_PADE)) begin failures++; $display("FAIL col-major"); end
    end
    if (dr_valid) begin
      drains++;
      checks++;
      if (exp_addr.size() == 0 || int'(dr_addr) != exp_addr[0]) begin
        failures++; $display("FAIL drain addr %0d", dr_addr);
      end
      if (exp_addr.size() != 0) void'(exp_addr.pop_front());
    end
  end

  task automatic push(instr_t i);
    in_valid = 1; in_instr = i;
    @(posedge clk) #1;
    while (!in_ready) @(posedge clk) #1;
    in_valid = 0;
  endtask

  function automatic instr_t mk(op_e op, int rows, int cols, int order, int base, int stride);
    instr_t i;
    i = '0; i.op = op; i.rows = 7'(rows); i.cols = 6'(cols); i.order = 4'(order);
    i.dst_base = addr_t'(base); i.dst_stride = addr_t'(stride); i.nlines = tag_t'(rows); i.len = 8;
    i.dma_len = 10;
    return i;
  endfunction

  initial begin
    in_valid = 0; in_instr = '0;
    repeat (2) @(posedge clk) #1;
    rst_n = 1;
    @(posedge clk) #1;
    // one GEMM alone: 3 rows x 4 columns drained
    for (int r = 0; r < 3; r++) for (int c = 0; c < 4; c++) exp_addr.push_back(100 + r * 10 + c);
    push(mk(OP_GEMM, 3, 4, 0, 100, 10));
    while (done_cnt != 1) @(posedge clk) #1;
    check("drains", drains, 12);
    check("no preload when alone", preload_cnt, 0);
    // two back-to-back tasks: the second is pre-decoded while the first streams
    starts.delete();
    push(mk(OP_PADE, 2, 0, 5, 0, 0));
    push(mk(OP_PADE, 2, 0, 4, 0, 0));
    while (done_cnt != 3) @(posedge clk) #1;
    check("preloaded", preload_cnt, 1);
    check("two starts", starts.size(), 2);
    // START of the second follows the first's start by stream + flush + done + idle + start
    if (starts.size() == 2) check("back-to-back gap", starts[1] - starts[0], EG_LEN + 1 + 5 + 1 + 1 + 1);
    // a DMA launched in the background, then a compute task, then WAIT
    push(mk(OP_DMA_IN, 1, 0, 0, 0, 0));
    @(posedge clk) #1;
    check("dma running", dma_busy, 1);
    push(mk(OP_ELEM, 2, 8, 0, 500, 8));
    for (int r = 0; r < 2; r++) for (int c = 0; c < 8; c++) exp_addr.push_back(500 + r * 8 + c);
    while (done_cnt != 4) @(posedge clk) #1;
    check("compute overlapped dma", dma_busy, 1);
    push(mk(OP_WAIT, 0, 0, 0, 0, 0));
    push(mk(OP_GEMM, 1, 2, 0, 50, 0));
    exp_addr.push_back(50); exp_addr.push_back(51);
    // the GEMM must not start before the DMA is idle
    while (done_cnt != 5) begin
      if (eg_start) begin checks++; if (dma_busy) begin failures++; $display("FAIL started during WAIT"); end end
      @(posedge clk) #1;
    end
    // refused task
    push(mk(OP_GEMM, 33, 4, 0, 0, 0));
    push(mk(OP_PADE, 1, 0, 9, 0, 0));
    repeat (10) @(posedge clk) #1;
    check("refused", err_cnt, 2);
    check("done unchanged", done_cnt, 5);
    // queue back-pressure: fill a 4-deep queue with long tasks
    in_valid = 1; in_instr = mk(OP_PADE, 1, 0, 1, 0, 0);
    for (int k = 0; k < 8; k++) @(posedge clk) #1;
    check("queue full", in_ready, 0);
    in_valid = 0;
    while (!idle) @(posedge clk) #1;
    check("all drained", exp_addr.size(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
