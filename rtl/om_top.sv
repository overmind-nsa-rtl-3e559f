// om_top: the Overmind neuro-symbolic accelerator.
//
// A ROWS x COLS array of PEs, one divider per row, a single-level SRAM with
// no L2, and a preemptive dual-window filter per row.  One instruction at a
// time streams a tensor region out of the SRAM over a shared broadcast bus;
// each row's window selects the elements its thread needs, so no per-row
// buffer or cache is filled ahead of the computation.  Rows compute GEMM,
// circular convolution (by per-PE index remapping), element-wise logic ops
// or a Pade rational approximation of a nonlinear function (numerator and
// denominator chains in the PEs, quotient in the row's divider).  Results go
// back into the same SRAM.  A DMA engine moves blocks between DRAM and SRAM
// in the background, and the controller pre-decodes the next instruction
// into the rows' shadow windows while the current one runs.
//
// Host access: a parallel port (instruction push, SRAM word write, SRAM word
// read) and a UART carrying the same three commands; the parallel port wins
// when both ask at once.  DRAM is outside the chip and reached through the
// DMA request/grant port.
//
// SRAM read-port priority: edge generator, DMA, parallel host, UART.
// SRAM write-port priority: Pade results, drain, DMA, parallel host, UART.
// The array size (32 x 16) and the 32 KB SRAM are the configuration the
// architecture was evaluated in; the port protocols are this RTL's own.
module om_top
  import om_pkg::*;
#(
  parameter int unsigned ROWS         = 32,
  parameter int unsigned COLS         = 16,
  parameter int unsigned RGF_DEPTH    = 16,
  parameter int unsigned SRAM_WORDS   = 8192,
  parameter int unsigned QDEPTH       = 8,
  parameter int unsigned CLKS_PER_BIT = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  // instruction push
  input  logic   in_valid,
  input  instr_t in_instr,
  output logic   in_ready,
  // host SRAM write
  input  logic   host_wvalid,
  input  addr_t  host_waddr,
  input  word_t  host_wdata,
  output logic   host_wready,
  // host SRAM read (data on the cycle after the grant)
  input  logic   host_rreq,
  input  addr_t  host_raddr,
  output logic   host_rgnt,
  output word_t  host_rdata,
  // UART
  input  logic   uart_rx,
  output logic   uart_tx,
  // off-chip DRAM
  output logic   dram_req,
  output logic   dram_we,
  output logic [DRAM_AW-1:0] dram_addr,
  output word_t  dram_wdata,
  input  logic   dram_gnt,
  input  logic   dram_rvalid,
  input  word_t  dram_rdata,
  // status
  output logic   idle,
  output logic   full,
  output logic [6:0]  task_cols,     // predict unit COL of the running task
  output logic [6:0]  task_rows,     // predict unit ROW of the running task
  output logic        task_fits,
  output logic [ROWS-1:0] row_active, // row-enable mask of the current broadcast segment
  output logic [31:0] done_cnt,
  output logic [31:0] err_cnt,
  output logic [31:0] preload_cnt    // instructions pre-decoded while another ran
);
  // ------------------------------------------------------------ controller
  instr_t cur, pre_instr, pu_instr, dma_instr;
  logic   pre_valid, swap, pu_load, clear, eg_start, eg_col_major, eg_issue_2;
  logic   eg_busy, rows_busy, dr_valid, dma_start, dma_busy;
  logic [$clog2(ROWS)-1:0] dr_row;
  logic [$clog2(COLS)-1:0] dr_col;
  addr_t  dr_addr;

  // UART host and its merge with the parallel host port
  logic   u_wvalid, u_wready, u_ivalid, u_iready, u_rreq, u_rgnt;
  addr_t  u_waddr, u_raddr;
  word_t  u_wdata;
  instr_t u_instr;
  logic   c_in_valid, c_in_ready;
  instr_t c_in_instr;

  assign c_in_valid = in_valid || u_ivalid;
  assign c_in_instr = in_valid ? in_instr : u_instr;
  assign in_ready   = c_in_ready;
  assign u_iready   = c_in_ready && !in_valid;

  om_controller #(.ROWS(ROWS), .COLS(COLS), .QDEPTH(QDEPTH)) u_ctrl (
    .clk, .rst_n,
    .in_valid(c_in_valid), .in_instr(c_in_instr), .in_ready(c_in_ready),
    .cur, .pre_valid, .pre_instr, .swap, .pu_load, .pu_instr, .clear,
    .eg_start, .eg_col_major, .eg_issue_2, .eg_busy, .rows_busy,
    .dr_valid, .dr_row, .dr_col, .dr_addr,
    .dma_start, .dma_instr, .dma_busy,
    .idle, .done_cnt, .err_cnt, .preload_cnt
  );

  // ------------------------------------------------------------ predict unit
  logic [COLS-1:0] col_mask;
  logic [ROWS-1:0] row_mask;
  om_predict_unit #(.ROWS(ROWS), .COLS(COLS)) u_pu (
    .clk, .rst_n, .load(pu_load), .instr(pu_instr),
    .col_cnt(task_cols), .row_cnt(task_rows), .col_mask, .row_mask, .full, .fits(task_fits)
  );

  // ------------------------------------------------------------ SRAM and its ports
  logic  s_re, s_we;
  addr_t s_raddr, s_waddr;
  word_t s_rdata, s_wdata;
  logic  eg_re;
  addr_t eg_raddr;
  logic  dma_rreq, dma_rgnt;
  addr_t dma_raddr;

  always_comb begin
    dma_rgnt  = 1'b0;
    host_rgnt = 1'b0;
    u_rgnt    = 1'b0;
    s_re      = 1'b1;
    if (eg_re)          s_raddr = eg_raddr;
    else if (dma_rreq)  begin s_raddr = dma_raddr;  dma_rgnt  = 1'b1; end
    else if (host_rreq) begin s_raddr = host_raddr; host_rgnt = 1'b1; end
    else if (u_rreq)    begin s_raddr = u_raddr;    u_rgnt    = 1'b1; end
    else begin s_raddr = '0; s_re = 1'b0; end
  end
  assign host_rdata = s_rdata;

  om_sram #(.WORDS(SRAM_WORDS)) u_sram (
    .clk, .re(s_re), .raddr(s_raddr), .rdata(s_rdata),
    .we(s_we), .waddr(s_waddr), .wdata(s_wdata)
  );

  // ------------------------------------------------------------ edge generator / broadcast bus
  logic  b_valid;
  tag_t  b_line, b_col, seg_lo, seg_hi;
  word_t b_data;
  om_edge_gen u_eg (
    .clk, .rst_n, .start(eg_start),
    .base(pu_instr.src_base), .stride(pu_instr.src_stride),
    .nlines(pu_instr.nlines), .len(pu_instr.len),
    .col_major(eg_col_major), .issue_2(eg_issue_2),
    .re(eg_re), .raddr(eg_raddr), .rdata(s_rdata),
    .b_valid, .b_line, .b_col, .b_data, .seg_lo, .seg_hi, .busy(eg_busy)
  );

  // ------------------------------------------------------------ rows
  logic  row_en   [ROWS];
  logic  pd_valid [ROWS];
  word_t pd_data  [ROWS];
  tag_t  pd_tag   [ROWS];
  logic  row_busy [ROWS];
  word_t acc_all  [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic s_valid;
    tag_t s_li, s_lj;
    om_dual_window #(.ROW_IDX(r)) u_win (
      .clk, .rst_n, .pre_valid, .pre_instr, .swap,
      .b_valid, .b_line, .b_col, .seg_lo, .seg_hi,
      .row_en(row_en[r]), .s_valid, .s_li, .s_lj
    );
    om_pe_row #(.COLS(COLS), .RGF_DEPTH(RGF_DEPTH)) u_row (
      .clk, .rst_n,
      .op(cur.op), .fn(cur.fn), .order(cur.order), .ncols(cur.cols),
      .col_en(col_mask), .clear(clear && row_mask[r]),
      .s_valid(s_valid && row_mask[r]), .s_data(b_data), .s_li, .s_lj,
      .res_valid(pd_valid[r]), .res_data(pd_data[r]), .res_tag(pd_tag[r]),
      .acc(acc_all[r]), .busy(row_busy[r])
    );
  end

  always_comb begin
    rows_busy = 1'b0;
    for (int r = 0; r < ROWS; r++) begin
      rows_busy |= row_busy[r];
      row_active[r] = row_en[r];
    end
  end

  // ------------------------------------------------------------ DMA
  logic  dma_wvalid, dma_wready;
  addr_t dma_waddr;
  word_t dma_wdata;
  om_dma u_dma (
    .clk, .rst_n, .start(dma_start), .instr(dma_instr), .busy(dma_busy),
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata,
    .s_wvalid(dma_wvalid), .s_waddr(dma_waddr), .s_wdata(dma_wdata), .s_wready(dma_wready),
    .s_rreq(dma_rreq), .s_raddr(dma_raddr), .s_rgnt(dma_rgnt), .s_rdata(s_rdata)
  );

  // ------------------------------------------------------------ UART host
  om_uart_host #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst_n, .rx(uart_rx), .tx(uart_tx),
    .wvalid(u_wvalid), .waddr(u_waddr), .wdata(u_wdata), .wready(u_wready),
    .ivalid(u_ivalid), .instr(u_instr), .iready(u_iready),
    .rreq(u_rreq), .raddr(u_raddr), .rgnt(u_rgnt), .rdata(s_rdata)
  );

  // ------------------------------------------------------------ writeback
  logic  h_wvalid, h_wready;
  addr_t h_waddr;
  word_t h_wdata;
  assign h_wvalid    = host_wvalid || u_wvalid;
  assign h_waddr     = host_wvalid ? host_waddr : u_waddr;
  assign h_wdata     = host_wvalid ? host_wdata : u_wdata;
  assign host_wready = h_wready;
  assign u_wready    = h_wready && !host_wvalid;

  om_writeback #(.ROWS(ROWS)) u_wb (
    .clk, .rst_n, .dst_base(cur.dst_base), .dst_stride(cur.dst_stride),
    .pd_valid, .pd_data, .pd_tag,
    .dr_valid, .dr_addr, .dr_data(acc_all[dr_row][dr_col]),
    .dma_wvalid, .dma_waddr, .dma_wdata, .dma_wready,
    .host_wvalid(h_wvalid), .host_waddr(h_waddr), .host_wdata(h_wdata), .host_wready(h_wready),
    .we(s_we), .waddr(s_waddr), .wdata(s_wdata)
  );

endmodule
