// tb_om_pade_orders: the accuracy/order trade-off of the Pade engine on the
// full-size accelerator (32 x 16 PEs, default parameters).
//
// The nonlinear-function workload is run at several approximation orders on
// the same 32 x 16 input tensor (x uniform in [-2, 2]):
//   exp(x)  with its [m/m] approximants, m = 3, 4, 5, 6, coefficients
//           a_k = (2m-k)! m! / ((2m)! k! (m-k)!),  b_k = (-1)^k a_k
//   tanh(x) with x(15 + x^2)/(15 + 6x^2)                         (order 3)
//           x(945 + 105x^2 + x^4)/(945 + 420x^2 + 15x^4)         (order 5)
//           x(135135 + 17325x^2 + 378x^4 + x^6) /
//             (135135 + 62370x^2 + 3150x^4 + 28x^6)              (order 7)
//   (missing top denominator terms are zero coefficients).
// Coefficients are rounded to Q15.16 here and loaded with LOADC; each order
// needs only a different coefficient line and order field.  Every result is
// checked bit-exactly against a fixed-point model of the chains and divider,
// and against the real-valued approximant within 0.003.  The maximum error
// against the true function is printed per order; for tanh it must fall as
// the order rises from 3 to 5 (and stay below 0.001 at 7); for exp it must
// fall from order 3 to 4 and stay below 0.003 from order 4 on.  Beyond order
// 4 or 5 the error no longer falls: the highest coefficients (1/30240 for
// exp [5/5], 1/135135 for tanh [7/6]) are only a few LSBs of Q15.16 or round
// to zero, and the fixed-point rounding of the products then dominates.
// The number of PE columns each order occupies (2m) is read from the predict
// unit output while the task runs.
module tb_om_pade_orders;
  import om_pkg::*;
  localparam int R = 32, C = 16, NCFG = 7;
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
  assign dram_gnt = 1'b0;
  assign dram_rvalid = 1'b0;
  assign dram_rdata = '0;

  int checks = 0, failures = 0;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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
    @(negedge clk) d = longint'(host_rdata);
    @(posedge clk) #1;
  endtask

  task automatic push(instr_t i);
    in_valid = 1; in_instr = i;
    @(posedge clk) #1;
    while (!in_ready) @(posedge clk) #1;
    in_valid = 0;
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
  function automatic real fact(int n);
    real f = 1.0;
    for (int i = 2; i <= n; i++) f *= i;
    return f;
  endfunction

  localparam int PX_A = 0, CF_A = 1024, OUT_A = 2048;
  int   ord [NCFG] = '{3, 4, 5, 6, 3, 5, 7};
  bit   is_tanh [NCFG] = '{0, 0, 0, 0, 1, 1, 1};
  real  ca [NCFG][9], cb [NCFG][9];       // real coefficients a0..am, b0..bm
  longint qa [NCFG][9], qb [NCFG][9];     // Q15.16
  longint PX [R][C];
  real  maxerr [NCFG];
  int   colseen [NCFG];

  // columns the running task occupies, sampled while each PADE streams
  int cur_cfg = -1;
  always @(negedge clk)
    if (cur_cfg >= 0 && dut.cur.op == OP_PADE && dut.eg_busy) colseen[cur_cfg] = int'(task_cols);

  initial begin
    in_valid = 0; in_instr = '0; host_wvalid = 0; host_waddr = 0; host_wdata = 0;
    host_rreq = 0; host_raddr = 0; uart_rx = 1;
    for (int k = 0; k < NCFG; k++) begin
      maxerr[k] = 0.0; colseen[k] = 0;
      for (int i = 0; i < 9; i++) begin ca[k][i] = 0.0; cb[k][i] = 0.0; end
    end
    for (int k = 0; k < 4; k++) begin
      automatic int m = ord[k];
      for (int i = 0; i <= m; i++) begin
        ca[k][i] = fact(2 * m - i) * fact(m) / (fact(2 * m) * fact(i) * fact(m - i));
        cb[k][i] = ((i % 2) ? -1.0 : 1.0) * ca[k][i];
      end
    end
    // tanh, normalised so that b0 = 1
    ca[4][1] = 1.0; ca[4][3] = 1.0 / 15; cb[4][2] = 6.0 / 15;
    ca[5][1] = 1.0; ca[5][3] = 105.0 / 945; ca[5][5] = 1.0 / 945; cb[5][2] = 420.0 / 945; cb[5][4] = 15.0 / 945;
    ca[6][1] = 1.0; ca[6][3] = 17325.0 / 135135; ca[6][5] = 378.0 / 135135; ca[6][7] = 1.0 / 135135;
    cb[6][2] = 62370.0 / 135135; cb[6][4] = 3150.0 / 135135; cb[6][6] = 28.0 / 135135;
    for (int k = 0; k < NCFG; k++) for (int i = 0; i < 9; i++) begin
      qa[k][i] = longint'($rtoi(ca[k][i] * 65536.0 + ((ca[k][i] < 0) ? -0.5 : 0.5)));
      qb[k][i] = longint'($rtoi(cb[k][i] * 65536.0 + ((cb[k][i] < 0) ? -0.5 : 0.5)));
    end
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
      PX[r][c] = $signed(32'($urandom_range(0, 4 * 65536))) - 2 * 65536;

    repeat (3) @(posedge clk) #1;
    rst_n = 1;
    @(posedge clk) #1;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) hwrite(PX_A + r * C + c, PX[r][c]);
    for (int k = 0; k < NCFG; k++) begin
      hwrite(CF_A + 32 * k, qa[k][0]);
      for (int i = 1; i <= ord[k]; i++) begin
        hwrite(CF_A + 32 * k + i, qa[k][i]);
        hwrite(CF_A + 32 * k + ord[k] + i, qb[k][i]);
      end
    end

    for (int k = 0; k < NCFG; k++) begin
      automatic instr_t i = '0;
      i.op = OP_LOADC; i.rows = 7'(R); i.nlines = 1; i.len = tag_t'(2 * ord[k] + 1);
      i.src_base = addr_t'(CF_A + 32 * k);
      push(i);
      i = '0;
      i.op = OP_PADE; i.rows = 7'(R); i.nlines = tag_t'(R); i.len = tag_t'(C); i.order = 4'(ord[k]);
      i.src_base = addr_t'(PX_A); i.src_stride = addr_t'(C);
      i.dst_base = addr_t'(OUT_A + k * R * C); i.dst_stride = addr_t'(C);
      cur_cfg = k;
      push(i);
      // the queue is 8 deep; let each pair finish before moving to the next
      // coefficient set so the column sample belongs to this order
      @(posedge clk) #1;
      while (!idle) @(posedge clk) #1;
    end
    check("instructions done", done_cnt, 2 * NCFG);

    for (int k = 0; k < NCFG; k++) begin
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        automatic longint x = PX[r][c], p = 65536, sn = qa[k][0], sd = 65536, d;
        automatic real xr = real'(x) / 65536.0, pr = 1.0, nr = ca[k][0], dr = 1.0, yr, tr, e;
        for (int i = 1; i <= ord[k]; i++) begin
          p = qmul(p, x); sn = sat32(sn + qmul(qa[k][i], p)); sd = sat32(sd + qmul(qb[k][i], p));
          pr *= xr; nr += ca[k][i] * pr; dr += cb[k][i] * pr;
        end
        hread(OUT_A + k * R * C + r * C + c, d);
        check($sformatf("cfg %0d element %0d,%0d", k, r, c), d, qdiv(sn, sd));
        yr = real'(d) / 65536.0;
        e = yr - nr / dr;
        checks++;
        if (e > 0.003 || e < -0.003) begin
          failures++;
          $display("FAIL cfg %0d x=%f: %f vs approximant %f", k, xr, yr, nr / dr);
        end
        tr = is_tanh[k] ? (($exp(xr) - $exp(-xr)) / ($exp(xr) + $exp(-xr))) : $exp(xr);
        e = (yr > tr) ? yr - tr : tr - yr;
        if (e > maxerr[k]) maxerr[k] = e;
      end
      $display("%s order %0d: %0d PE columns, max |error| %f", is_tanh[k] ? "tanh" : "exp ",
               ord[k], colseen[k], maxerr[k]);
      check("columns = 2m", colseen[k], 2 * ord[k]);
    end
    checks++; if (!(maxerr[4] > 10 * maxerr[5] && maxerr[6] < 0.001)) begin
      failures++; $display("FAIL tanh error does not fall with the order");
    end
    checks++; if (!(maxerr[0] > 5 * maxerr[1])) begin
      failures++; $display("FAIL exp error does not fall from order 3 to 4");
    end
    for (int k = 1; k < 4; k++) begin
      checks++;
      if (maxerr[k] > 0.003) begin failures++; $display("FAIL exp order %0d error %f", ord[k], maxerr[k]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
