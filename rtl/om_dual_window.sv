// om_dual_window: the preemptive dual-window filter of one PE row.
//
// SRAM broadcasts one element per cycle to all rows on a shared bus, tagged
// with its 2D position (line, column) inside the tensor being streamed.  Each
// row keeps three window registers -- batch start (start line and start
// column), row boundary (last line) and column boundary (last column) -- and
// passes an element to its PEs only when the tag lies inside both windows,
// converting it to window-local coordinates (li, lj).
//
// The windows come from tensor metadata, never from a cache lookup.  The
// controller pre-decodes the next instruction while the current one still
// runs: pre_valid writes the next window into shadow registers, and swap
// copies them into the active registers when that instruction starts, so no
// cycle is spent configuring windows between layers.
//
// Row enable: for each broadcast segment (the range of lines the stream is
// currently covering, seg_lo..seg_hi) the row is enabled only when its line
// window intersects that range; a disabled row sees no input activity.
//
// Window rules (choice of this RTL): for per-row operations row r takes line
// r, columns 0..len-1; for shared loads (LOADW, LOADC) every used row takes
// lines 0..nlines-1.  Rows at or above instr.rows are switched off.
// Timing: the filter is combinational from the broadcast to s_valid.
// Synthesised alone with ROW_IDX = 0, s_li and s_lj reduce to the broadcast
// tags themselves: row 0's windows always start at line 0, column 0.  In
// other rows they are real subtractions.
module om_dual_window
  import om_pkg::*;
#(
  parameter int unsigned ROW_IDX = 0
) (
  input  logic   clk,
  input  logic   rst_n,
  // pre-decode of the next instruction and activation
  input  logic   pre_valid,
  input  instr_t pre_instr,
  input  logic   swap,
  // broadcast stream
  input  logic   b_valid,
  input  tag_t   b_line,
  input  tag_t   b_col,
  input  tag_t   seg_lo,
  input  tag_t   seg_hi,
  // to the row
  output logic   row_en,
  output logic   s_valid,
  output tag_t   s_li,
  output tag_t   s_lj
);
  typedef struct packed {
    logic en;
    tag_t start_line;   // batch start (line)
    tag_t start_col;    // batch start (column)
    tag_t end_line;     // row boundary
    tag_t end_col;      // column boundary
  } win_t;

  win_t shadow_q, active_q, next_w;

  always_comb begin
    next_w.en        = 7'(ROW_IDX) < pre_instr.rows;
    next_w.start_col = '0;
    next_w.end_col   = pre_instr.len - 1'b1;
    if (op_shared_window(pre_instr.op)) begin
      next_w.start_line = '0;
      next_w.end_line   = pre_instr.nlines - 1'b1;
    end else begin
      next_w.start_line = tag_t'(ROW_IDX);
      next_w.end_line   = tag_t'(ROW_IDX);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shadow_q <= '0;
      active_q <= '0;
    end else begin
      if (pre_valid) shadow_q <= next_w;
      if (swap)      active_q <= shadow_q;
    end
  end

  assign row_en = active_q.en && !(active_q.end_line < seg_lo || active_q.start_line > seg_hi);

  logic in_rows, in_cols;
  assign in_rows = (b_line >= active_q.start_line) && (b_line <= active_q.end_line);
  assign in_cols = (b_col  >= active_q.start_col)  && (b_col  <= active_q.end_col);
  assign s_valid = b_valid && row_en && in_rows && in_cols;
  assign s_li    = b_line - active_q.start_line;
  assign s_lj    = b_col  - active_q.start_col;

  // a selected element always lies in the enabled segment
  a_sel_in_seg: assert property (@(posedge clk) disable iff (!rst_n)
    (b_valid && active_q.en && in_rows && in_cols) |-> row_en);

endmodule
