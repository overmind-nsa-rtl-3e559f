// tb_om_top: end-to-end test of the whole accelerator at its default size
// (32 x 16 PEs, 32 KB SRAM).  A small neuro-symbolic pipeline is run through
// the instruction port while a DMA copy from the DRAM model proceeds in the
// background:
//   1. W (16 x 16), X (32 x 16), B (32 x 16), V and the Pade inputs are written
//      into the SRAM over the host port; A (32 x 16) sits in DRAM
//   2. DMA_IN A, then LOADW W + GEMM Y = X * W (32 threads x 16 columns)
//      while the copy runs; WAIT
//   3. LOADV A + CCONV: binding of A_r and B_r, N = 16, per thread
//   4. LOADV V + ELEM max: fuzzy OR of X and V
//   5. LOADC + PADE: exp(x) by its [4/4] approximant, 32 threads, then
//      one thread alone (every-second-cycle issue)
//   6. a task with 33 rows (refused), DMA_OUT of the GEMM result, WAIT
//   7. one result word read back over the UART
// Every output word is compared with a reference computed here (integer
// matrix products, circular convolution, max, and a fixed-point model of the
// Pade chains and divider, plus a tolerance check against the real exp).
// The mechanisms -- Pade with dividers, GEMM with dividers idle, circular
// index remapping, pre-decode of the next instruction, row-enable gating,
// DMA overlapping computation, DMA stalled by result writes, the FULL flag,
// task refusal and the UART path -- are counted; one that never happens is
// a failure.
module tb_om_top;
  import om_pkg::*;
  localparam int R = 32, C = 16, CPB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, host_wvalid, host_wready, host_rreq, host_rgnt;
  instr_t in_instr;
  addr_t host_waddr, host_raddr;
  word_t host_wdata, host_rdata;
  logic uart_rx, uart_tx;
  logic dram_req, dram_we, dram_gnt, dram_rvalid;
  logic [31:0] dram_addr;
  word_t dram_wdata, dram_rdata;
  logic idle, full, task_fits;
  logic [6:0] task_cols, task_rows;
  logic [R-1:0] row_active;
  logic [31:0] done_cnt, err_cnt, preload_cnt;

  om_top dut (.*);
  om_dram_model #(.WORDS(65536)) u_dram (
    .clk, .req(dram_req), .we(dram_we), .addr(dram_addr), .wdata(dram_wdata),
    .gnt(dram_gnt), .rvalid(dram_rvalid), .rdata(dram_rdata));

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ mechanism counters
  int n_pade = 0, n_gemm_div_idle = 0, n_cconv_wrap = 0, n_row_gated = 0, n_dma_overlap = 0;
  int n_dma_stall = 0, n_full = 0, n_uart = 0, n_broadcast = 0;
  always @(negedge clk) if (rst_n) begin
    automatic int npd = 0;
    for (int r = 0; r < R; r++) if (dut.pd_valid[r]) npd++;
    n_pade += npd;
    if (dut.cur.op == OP_GEMM && dut.b_valid && npd == 0) n_gemm_div_idle++;
    // an element that, in some column, reads a register-file entry that wrapped around
    if (dut.cur.op == OP_CCONV && dut.g_row[0].s_valid && int'(dut.g_row[0].s_lj) > 0) n_cconv_wrap++;
    if (dut.b_valid) n_broadcast++;
    if (dut.b_valid && (row_active != dut.row_mask)) n_row_gated++;
    if (dut.dma_busy && dut.eg_busy) n_dma_overlap++;
    if (dut.dma_wvalid && !dut.dma_wready) n_dma_stall++;
    if (full) n_full++;
    if (dut.u_rgnt) n_uart++;
  end

  // ------------------------------------------------------------ host helpers
  task automatic hwrite(int a, longint d);
    host_wvalid = 1; host_waddr = addr_t'(a); host_wdata = word_t'(d);
    @(posedge clk) #1;
    while (!host_wready) @(posedge clk) #1;
    host_wvalid = 0;
  endtask

  task automatic hread(int a, output longint d);
    host_rreq = 1; host_raddr = addr_t'(a);
    @(posedge clk) #1;
    while (!host_rgnt) @(posedge clk) #1;
    host_rreq = 0;
    // data on the cycle after the grant
    #0 d = longint'(host_rdata);
    @(negedge clk) d = longint'(host_rdata);
    @(posedge clk) #1;
  endtask

  task automatic push(instr_t i);
    in_valid = 1; in_instr = i;
    @(posedge clk) #1;
    while (!in_ready) @(posedge clk) #1;
    in_valid = 0;
  endtask

  function automatic instr_t mk(op_e op, int rows, int nlines, int len, int src, int stride,
                                int cols = 0, int dst = 0, int dstride = 0, int order = 0);
    instr_t i;
    i = '0; i.op = op; i.rows = 7'(rows); i.nlines = tag_t'(nlines); i.len = tag_t'(len);
    i.src_base = addr_t'(src); i.src_stride = addr_t'(stride); i.cols = 6'(cols);
    i.dst_base = addr_t'(dst); i.dst_stride = addr_t'(dstride); i.order = 4'(order);
    return i;
  endfunction

  task automatic wait_idle();
    @(posedge clk) #1;
    while (!idle) @(posedge clk) #1;
  endtask

  // ------------------------------------------------------------ reference helpers
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
  function automatic longint wrap32(longint v); return longint'(int'(v)); endfunction

  // SRAM layout (words)
  localparam int W_A = 0, X_A = 256, A_A = 768, B_A = 1280, V_A = 1792, CF_A = 2304, PX_A = 2320;
  localparam int Y_A = 3000, CC_A = 3600, EL_A = 4200, PD_A = 4800, P1_A = 5400, DR_OUT = 20000;
  localparam int M = 4;

  longint W [16][C], X [R][16], A [R][16], B [R][16], V [R][16], PX [R][16], CF [2*M+1];

  initial begin
    longint d;
    int t0, t1;
    in_valid = 0; in_instr = '0; host_wvalid = 0; host_waddr = 0; host_wdata = 0;
    host_rreq = 0; host_raddr = 0; uart_rx = 1;
    // ---------------------------------------------------------------- data
    for (int k = 0; k < 16; k++) for (int c = 0; c < C; c++) W[k][c] = $signed(8'($urandom));
    for (int r = 0; r < R; r++) for (int j = 0; j < 16; j++) begin
      X[r][j] = $signed(8'($urandom)); A[r][j] = $signed(8'($urandom));
      B[r][j] = $signed(8'($urandom)); V[r][j] = $signed(8'($urandom));
      PX[r][j] = $signed(32'($urandom_range(0, 4 * 65536))) - 2 * 65536;   // -2 .. 2
      u_dram.mem[r * 16 + j] = 32'(A[r][j]);
    end
    // exp [4/4]: a_k = (8-k)! 4! / (8! k! (4-k)!), b_k = (-1)^k a_k
    CF[0] = 65536; CF[1] = 32768; CF[2] = 7022; CF[3] = 780; CF[4] = 39;
    CF[5] = -32768; CF[6] = 7022; CF[7] = -780; CF[8] = 39;
    repeat (3) @(posedge clk) #1;
    rst_n = 1;
    @(posedge clk) #1;
    for (int k = 0; k < 16; k++) for (int c = 0; c < C; c++) hwrite(W_A + k * 16 + c, W[k][c]);
    for (int r = 0; r < R; r++) for (int j = 0; j < 16; j++) begin
      hwrite(X_A + r * 16 + j, X[r][j]);
      hwrite(B_A + r * 16 + j, B[r][j]);
      hwrite(V_A + r * 16 + j, V[r][j]);
      hwrite(PX_A + r * 16 + j, PX[r][j]);
    end
    for (int k = 0; k <= 2 * M; k++) hwrite(CF_A + k, CF[k]);

    // ---------------------------------------------------------------- program
    begin
      instr_t i;
      i = mk(OP_DMA_IN, 0, 0, 0, 0, 0, 0, A_A); i.dram_addr = 0; i.dma_len = 512;
      push(i);
    end
    push(mk(OP_LOADW, R, 16, 16, W_A, 16));
    push(mk(OP_GEMM, R, R, 16, X_A, 16, 16, Y_A, 16));
    push(mk(OP_WAIT, 0, 0, 0, 0, 0));
    push(mk(OP_LOADV, R, R, 16, A_A, 16));
    push(mk(OP_CCONV, R, R, 16, B_A, 16, 16, CC_A, 16));
    push(mk(OP_LOADV, R, R, 16, V_A, 16));
    begin
      instr_t i;
      i = mk(OP_ELEM, R, R, 16, X_A, 16, 16, EL_A, 16); i.fn = FN_MAX;
      push(i);
    end
    push(mk(OP_LOADC, R, 1, 2 * M + 1, CF_A, 0));
    t0 = cycle;
    push(mk(OP_PADE, R, R, 16, PX_A, 16, 0, PD_A, 16, M));
    push(mk(OP_PADE, 1, 1, 16, PX_A, 16, 0, P1_A, 16, M));
    push(mk(OP_GEMM, 33, 33, 16, X_A, 16, 16, 0, 16));       // does not fit: refused
    begin
      instr_t i;
      i = mk(OP_DMA_OUT, 0, 0, 0, Y_A, 0); i.dram_addr = DR_OUT; i.dma_len = 512;
      push(i);
    end
    push(mk(OP_WAIT, 0, 0, 0, 0, 0));
    wait_idle();
    t1 = cycle;
    check("instructions done", done_cnt, 9);
    check("refused", err_cnt, 1);

    // ---------------------------------------------------------------- results
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      automatic longint e = 0, ec = 0, dd;
      for (int k = 0; k < 16; k++) e += X[r][k] * W[k][c];
      hread(Y_A + r * 16 + c, d);
      check($sformatf("gemm %0d,%0d", r, c), d, wrap32(e));
      check("dma out", longint'($signed(u_dram.mem[DR_OUT + r * 16 + c])), wrap32(e));
      for (int j = 0; j < 16; j++) ec += A[r][j] * B[r][(c - j + 16) % 16];
      hread(CC_A + r * 16 + c, d);
      check($sformatf("cconv %0d,%0d", r, c), d, wrap32(ec));
      hread(EL_A + r * 16 + c, d);
      check($sformatf("fuzzy or %0d,%0d", r, c), d, (X[r][c] > V[r][c]) ? X[r][c] : V[r][c]);
      begin
        automatic longint p = 65536, sn = CF[0], sd = 65536, x = PX[r][c];
        real xr, yr;
        for (int k = 1; k <= M; k++) begin
          p = qmul(p, x); sn = sat32(sn + qmul(CF[k], p)); sd = sat32(sd + qmul(CF[M + k], p));
        end
        hread(PD_A + r * 16 + c, d);
        check($sformatf("pade %0d,%0d", r, c), d, qdiv(sn, sd));
        xr = real'(x) / 65536.0; yr = real'(d) / 65536.0;
        checks++;
        if (yr - $exp(xr) > 0.01 || $exp(xr) - yr > 0.01) begin
          failures++; $display("FAIL exp(%f)=%f got %f", xr, $exp(xr), yr);
        end
        if (r == 0) begin
          hread(P1_A + c, dd);
          check("pade single thread", dd, qdiv(sn, sd));
        end
      end
    end

    // ---------------------------------------------------------------- UART read of one result
    begin
      logic [7:0] cmd [3];
      logic [31:0] rw;
      int a;
      a = Y_A + 5;
      cmd[0] = 8'h03; cmd[1] = 8'(a >> 8); cmd[2] = 8'(a);
      fork
        begin
          for (int b = 0; b < 3; b++) begin
            uart_rx = 0; repeat (CPB) @(posedge clk);
            for (int i = 0; i < 8; i++) begin uart_rx = cmd[b][i]; repeat (CPB) @(posedge clk); end
            uart_rx = 1; repeat (CPB) @(posedge clk);
          end
        end
        begin
          for (int b = 0; b < 4; b++) begin
            @(negedge uart_tx);
            repeat (CPB / 2) @(posedge clk);
            for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); rw[31 - 8 * b - 7 + i] = uart_tx; end
            repeat (CPB) @(posedge clk);
          end
        end
      join
      begin
        automatic longint e = 0;
        for (int k = 0; k < 16; k++) e += X[0][k] * W[k][5];
        check("uart read", longint'($signed(rw)), wrap32(e));
      end
    end

    // ---------------------------------------------------------------- mechanisms
    $display("program cycles %0d, broadcasts %0d", t1 - t0, n_broadcast);
    $display("pade results %0d, gemm cycles with dividers idle %0d, wrapped cconv elements %0d",
             n_pade, n_gemm_div_idle, n_cconv_wrap);
    $display("pre-decoded %0d, row-gated cycles %0d, dma overlap %0d, dma stalls %0d, full %0d, uart reads %0d",
             preload_cnt, n_row_gated, n_dma_overlap, n_dma_stall, n_full, n_uart);
    check("mech pade", n_pade, R * 16 + 16);
    checks++; if (n_gemm_div_idle == 0) begin failures++; $display("FAIL never: gemm with dividers idle"); end
    checks++; if (n_cconv_wrap == 0)    begin failures++; $display("FAIL never: circular wrap"); end
    checks++; if (preload_cnt == 0)     begin failures++; $display("FAIL never: pre-decode"); end
    checks++; if (n_row_gated == 0)     begin failures++; $display("FAIL never: row gating"); end
    checks++; if (n_dma_overlap == 0)   begin failures++; $display("FAIL never: dma overlap"); end
    checks++; if (n_dma_stall == 0)     begin failures++; $display("FAIL never: dma stall"); end
    checks++; if (n_full == 0)          begin failures++; $display("FAIL never: full"); end
    checks++; if (n_uart == 0)          begin failures++; $display("FAIL never: uart"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
