// om_controller: instruction queue and sequencer of the Overmind accelerator.
//
// Instructions arrive on a valid/ready port into a QDEPTH-entry queue and run
// one at a time.  A compute instruction goes through
//   START  swap the pre-loaded windows in, load the predict unit, clear the
//          accumulators (GEMM, CCONV, ELEM) and start the edge generator
//   STREAM the SRAM broadcasts the source region
//   FLUSH  wait until the rows' Pade chains and dividers are empty
//   DRAIN  (GEMM, CCONV, ELEM) write the rows x cols accumulators to
//          dst_base + r * dst_stride + c, one word per cycle
//   DONE
// While an instruction is in STREAM, FLUSH or DRAIN, the next compute
// instruction in the queue is pre-decoded: its windows are written into the
// rows' shadow registers (pre_valid), so it can start on the cycle after the
// current one finishes.  DMA instructions launch a background block copy
// and leave the queue at once, so data for later layers is fetched while the
// array computes; WAIT holds the queue until the DMA engine is idle.  A task
// that asks for more rows or columns than the array has is dropped and
// counted in err_cnt.
//
// Pre-decoding the next instruction and loading its windows before the
// current layer completes follows the architecture; the queue, the state
// sequence and the drain order are choices of this RTL.
module om_controller
  import om_pkg::*;
#(
  parameter int unsigned ROWS   = 32,
  parameter int unsigned COLS   = 16,
  parameter int unsigned QDEPTH = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  // instruction input
  input  logic   in_valid,
  input  instr_t in_instr,
  output logic   in_ready,
  // current instruction, to the rows and the writeback
  output instr_t cur,
  // window pre-load and activation
  output logic   pre_valid,
  output instr_t pre_instr,
  output logic   swap,
  output logic   pu_load,
  output instr_t pu_instr,
  output logic   clear,
  // edge generator
  output logic   eg_start,
  output logic   eg_col_major,
  output logic   eg_issue_2,
  input  logic   eg_busy,
  input  logic   rows_busy,
  // accumulator drain
  output logic   dr_valid,
  output logic [$clog2(ROWS)-1:0] dr_row,
  output logic [$clog2(COLS)-1:0] dr_col,
  output addr_t  dr_addr,
  // DMA
  output logic   dma_start,
  output instr_t dma_instr,
  input  logic   dma_busy,
  // status
  output logic   idle,
  output logic [31:0] done_cnt,
  output logic [31:0] err_cnt,
  output logic [31:0] preload_cnt
);
  localparam int unsigned QW = $clog2(QDEPTH);

  typedef enum logic [2:0] {S_IDLE, S_START, S_STREAM, S_FLUSH, S_DRAIN, S_DONE} state_e;
  state_e state_q;

  // ------------------------------------------------------------ queue
  instr_t q [QDEPTH];
  logic [QW-1:0] rd_q, wr_q;
  logic [QW:0]   cnt_q;
  logic pop;
  instr_t head;
  assign head     = q[rd_q];
  assign in_ready = (cnt_q != (QW+1)'(QDEPTH));

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) q[wr_q] <= in_instr;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else begin
      if (in_valid && in_ready) wr_q <= wr_q + 1'b1;
      if (pop) rd_q <= rd_q + 1'b1;
      cnt_q <= cnt_q + (QW+1)'(in_valid && in_ready) - (QW+1)'(pop);
    end
  end

  // ------------------------------------------------------------ task fit check
  logic [6:0] need_cols;
  logic       head_fits;
  always_comb begin
    need_cols = (head.op == OP_PADE) ? 7'(2 * head.order) :
                (head.op inside {OP_GEMM, OP_CCONV, OP_ELEM}) ? 7'(head.cols) : 7'd0;
    head_fits = (head.rows != '0) && (head.rows <= 7'(ROWS)) && (need_cols <= 7'(COLS)) &&
                !(head.op == OP_PADE && head.order == '0);
  end

  // ------------------------------------------------------------ sequencer
  logic preloaded_q;
  logic [$clog2(ROWS)-1:0] r_q;
  logic [$clog2(COLS)-1:0] c_q;
  addr_t line_addr_q;
  logic  have_head;
  assign have_head = (cnt_q != '0);

  always_comb begin
    pop       = 1'b0;
    pre_valid = 1'b0;
    swap      = 1'b0;
    pu_load   = 1'b0;
    clear     = 1'b0;
    eg_start  = 1'b0;
    dma_start = 1'b0;
    unique case (state_q)
      S_IDLE: if (have_head) begin
        if (op_is_compute(head.op)) begin
          if (!head_fits) pop = 1'b1;
          else if (!preloaded_q) pre_valid = 1'b1;
        end else if (head.op inside {OP_DMA_IN, OP_DMA_OUT}) begin
          if (!dma_busy) begin dma_start = 1'b1; pop = 1'b1; end
        end else if (head.op == OP_WAIT) begin
          if (!dma_busy) pop = 1'b1;
        end else pop = 1'b1;
      end
      S_START: begin
        swap     = 1'b1;
        pu_load  = 1'b1;
        clear    = op_drains(head.op);
        eg_start = 1'b1;
        pop      = 1'b1;
      end
      S_STREAM, S_FLUSH, S_DRAIN:
        if (have_head && op_is_compute(head.op) && head_fits && !preloaded_q) pre_valid = 1'b1;
      default: ;
    endcase
  end

  assign pre_instr    = head;
  assign pu_instr     = head;
  assign dma_instr    = head;
  assign eg_col_major = (head.op == OP_PADE);
  assign eg_issue_2   = (head.op == OP_PADE) && (head.nlines == tag_t'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cur <= '0;
      preloaded_q <= 1'b0;
      r_q <= '0; c_q <= '0; line_addr_q <= '0;
      done_cnt <= '0; err_cnt <= '0; preload_cnt <= '0;
    end else begin
      if (pre_valid) begin
        preloaded_q <= 1'b1;
        if (state_q != S_IDLE) preload_cnt <= preload_cnt + 1;
      end
      unique case (state_q)
        S_IDLE: if (have_head && op_is_compute(head.op)) begin
          if (!head_fits) err_cnt <= err_cnt + 1;
          else if (preloaded_q) state_q <= S_START;
        end
        S_START: begin
          cur         <= head;
          preloaded_q <= 1'b0;
          state_q     <= S_STREAM;
        end
        S_STREAM: if (!eg_busy) state_q <= S_FLUSH;
        S_FLUSH: if (!rows_busy) begin
          r_q <= '0; c_q <= '0; line_addr_q <= cur.dst_base;
          state_q <= op_drains(cur.op) ? S_DRAIN : S_DONE;
        end
        S_DRAIN: begin
          if (7'(c_q) == 7'(cur.cols) - 7'd1) begin
            c_q <= '0;
            line_addr_q <= line_addr_q + cur.dst_stride;
            if (7'(r_q) == cur.rows - 7'd1) state_q <= S_DONE;
            else r_q <= r_q + 1'b1;
          end else c_q <= c_q + 1'b1;
        end
        S_DONE: begin
          done_cnt <= done_cnt + 1;
          cur.op   <= OP_NOP;
          state_q  <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign dr_valid = (state_q == S_DRAIN);
  assign dr_row   = r_q;
  assign dr_col   = c_q;
  assign dr_addr  = line_addr_q + addr_t'(c_q);
  assign idle     = (state_q == S_IDLE) && !have_head && !dma_busy;

  a_no_push_when_full: assert property (@(posedge clk) disable iff (!rst_n)
    (cnt_q == (QW+1)'(QDEPTH)) |-> !(in_valid && in_ready));

endmodule
