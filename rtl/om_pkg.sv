// om_pkg: types and constants shared by the Overmind accelerator RTL.
//
// The accelerator is a 32-row x 16-column PE array with one divider per row, a
// single-level 32 KB SRAM that broadcasts a tagged element stream to every row,
// and a per-row dual-window filter that picks out the elements a row needs.
// This package holds the datapath word format, the operation codes and the
// instruction bundle that the controller executes.
//
// Number formats (a choice of this RTL; the source architecture only says INT8
// data): every SRAM word and every PE register is a DW-bit signed word.  Linear
// operations (GEMM, circular convolution, element-wise) use plain integer
// arithmetic on sign-extended INT8 values with a DW-bit accumulator.  The Pade
// nonlinear path works in signed fixed point with FRAC fraction bits
// (Q15.16 for the defaults) and saturates instead of wrapping.
package om_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned DW   = 32;   // datapath / SRAM word width
  parameter int unsigned FRAC = 16;   // fraction bits of the Pade fixed point
  parameter int unsigned AW   = 16;   // SRAM word-address width
  parameter int unsigned TW   = 16;   // stream tag width (line index, column index)
  parameter int unsigned DRAM_AW = 32;

  // latency of om_divider: input register, DW+FRAC quotient stages, output register
  parameter int unsigned DIV_LATENCY = DW + FRAC + 2;

  typedef logic signed [DW-1:0] word_t;
  typedef logic [AW-1:0]        addr_t;
  typedef logic [TW-1:0]        tag_t;

  localparam word_t FX_ONE = word_t'(1) <<< FRAC;
  localparam word_t FX_MAX = {1'b0, {(DW-1){1'b1}}};
  localparam word_t FX_MIN = {1'b1, {(DW-1){1'b0}}};

  // ---------------------------------------------------------------- operations
  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_LOADW   = 4'd1,  // shared matrix W[k][c] -> register file entry k of PE column c, all rows
    OP_LOADV   = 4'd2,  // per-row vector V_r[j] -> register file entry j of every PE of row r
    OP_LOADC   = 4'd3,  // Pade coefficients a0..am, b1..bm -> coefficient registers, all rows
    OP_GEMM    = 4'd4,  // out[r][c] = sum_k X[r][k] * W[k][c]
    OP_CCONV   = 4'd5,  // out[r][i] = sum_j B_r[j] * A_r[(i-j) mod N], A_r in register files
    OP_ELEM    = 4'd6,  // out[r][j] = f(X[r][j], V_r[j])
    OP_PADE    = 4'd7,  // out[r][j] = P(x)/Q(x) for x = X[r][j]
    OP_DMA_IN  = 4'd8,  // DRAM -> SRAM block copy, runs in the background
    OP_DMA_OUT = 4'd9,  // SRAM -> DRAM block copy, runs in the background
    OP_WAIT    = 4'd10  // wait until the DMA engine is idle
  } op_e;

  typedef enum logic [2:0] {
    FN_ADD  = 3'd0,
    FN_SUB  = 3'd1,  // V - x; with V = "1" this is fuzzy NOT
    FN_MUL  = 3'd2,
    FN_MAX  = 3'd3,  // fuzzy OR
    FN_MIN  = 3'd4,  // fuzzy AND
    FN_RELU = 3'd5
  } fn_e;

  // Instruction bundle: operation encoding, hardware configuration (rows =
  // threads, cols = PE columns, Pade order) and tensor metadata (shape, stride).
  typedef struct packed {
    op_e         op;
    fn_e         fn;
    logic [3:0]  order;       // Pade order m (numerator and denominator)
    logic [6:0]  rows;        // PE rows (threads) used
    logic [5:0]  cols;        // PE columns used (GEMM/CCONV/ELEM), N for CCONV
    addr_t       src_base;    // first word of the source tensor
    addr_t       src_stride;  // words between consecutive lines (line size)
    logic [TW-1:0] nlines;    // lines streamed
    logic [TW-1:0] len;       // elements per line
    addr_t       dst_base;
    addr_t       dst_stride;
    logic [DRAM_AW-1:0] dram_addr;
    addr_t       dma_len;
  } instr_t;

  function automatic logic op_is_compute(op_e op);
    return op inside {OP_LOADW, OP_LOADV, OP_LOADC, OP_GEMM, OP_CCONV, OP_ELEM, OP_PADE};
  endfunction

  // operations whose results stay in the PE accumulators and are drained afterwards
  function automatic logic op_drains(op_e op);
    return op inside {OP_GEMM, OP_CCONV, OP_ELEM};
  endfunction

  // operations in which every row reads the same lines (shared window)
  function automatic logic op_shared_window(op_e op);
    return op inside {OP_LOADW, OP_LOADC};
  endfunction

  // Fixed-point helpers for the Pade path.
  function automatic word_t sat_word(logic signed [2*DW-1:0] v);
    if (v > (2*DW)'(FX_MAX)) return FX_MAX;
    if (v < (2*DW)'(FX_MIN)) return FX_MIN;
    return word_t'(v);
  endfunction

  function automatic word_t fx_mul(word_t a, word_t b);
    logic signed [2*DW-1:0] p;
    p = (2*DW)'(a) * (2*DW)'(b);
    return sat_word(p >>> FRAC);
  endfunction

  function automatic word_t fx_add(word_t a, word_t b);
    return sat_word((2*DW)'(a) + (2*DW)'(b));
  endfunction

endpackage
