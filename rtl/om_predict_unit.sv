// om_predict_unit: works out which part of the PE array a task occupies.
//
// For a decoded instruction it computes COL, the number of PE columns the
// task activates (2*m for a Pade task of order m: m numerator and m
// denominator columns; the instruction's column count otherwise), ROW, the
// number of rows (threads), the column and row enable masks used to switch
// idle PEs and dividers off, and FULL, set when the task occupies every row
// of the array so that nothing else can be placed beside it.  fits is low
// when the task asks for more rows or columns than the array has; the
// controller then refuses the task.
//
// COL = 2*m for Pade, ROW = threads and the FULL flag are the registers shown
// for the predict unit of the architecture; placing the task in the lowest
// rows and leftmost columns is a choice of this RTL.  The outputs are
// registered on load and hold until the next load.  col_cnt is 7 bits wide
// like row_cnt; its top bit is always 0 (at most 2*15 or 63 columns).
module om_predict_unit
  import om_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  instr_t          instr,
  output logic [6:0]      col_cnt,
  output logic [6:0]      row_cnt,
  output logic [COLS-1:0] col_mask,
  output logic [ROWS-1:0] row_mask,
  output logic            full,
  output logic            fits
);
  logic [6:0] col_n, row_n;
  always_comb begin
    unique case (instr.op)
      OP_PADE:  col_n = 7'(2 * instr.order);
      OP_GEMM, OP_CCONV, OP_ELEM: col_n = 7'(instr.cols);
      OP_LOADW, OP_LOADV, OP_LOADC: col_n = 7'(COLS);
      default:  col_n = '0;
    endcase
    row_n = op_is_compute(instr.op) ? instr.rows : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_cnt <= '0; row_cnt <= '0; col_mask <= '0; row_mask <= '0;
      full <= 1'b0; fits <= 1'b1;
    end else if (load) begin
      col_cnt <= col_n;
      row_cnt <= row_n;
      for (int c = 0; c < COLS; c++) col_mask[c] <= (7'(c) < col_n);
      for (int r = 0; r < ROWS; r++) row_mask[r] <= (7'(r) < row_n);
      full <= (row_n >= 7'(ROWS));
      fits <= (row_n <= 7'(ROWS)) && (col_n <= 7'(COLS));
    end
  end
endmodule
