// om_pe_row: one row (one thread) of the PE array together with its divider.
//
// The row receives the elements its dual-window filter selected from the SRAM
// broadcast, each with its local coordinates (li = line within the window,
// lj = column within the window), and wires its COLS PEs according to the
// operation of the current instruction:
//
//   LOADW  element (li, lj) goes to register-file entry li of PE column lj
//   LOADV  element lj goes to register-file entry lj of every PE of the row
//   LOADC  element 0 is the numerator constant a0, element j >= 1 goes to the
//          coefficient register of PE j-1 (a1..am, then b1..bm)
//   GEMM   every enabled PE c:  C += RGF[lj] * x
//   CCONV  every enabled PE c:  C += RGF[(c - lj) mod N] * x.  The circular
//          offset is applied to each PE's index instead of rotating operands
//          through shift registers.
//   ELEM   PE c = lj:           C = f(x, RGF[c])
//   PADE   PEs 0..m-1 form the numerator chain and PEs m..2m-1 the
//          denominator chain of R(x) = (a0 + sum a_i x^i) / (1 + sum b_j x^j).
//          Both chains start on the same element, run in parallel and end on
//          the same cycle; the row's divider then forms the quotient.
//
// Timing: a Pade element leaves the divider 2*m + DIV_LATENCY cycles after it
// entered the row, and the row accepts one every second cycle.  MAC and
// element-wise results are in the accumulators one cycle after the element.
// The chain wiring and the one-divider-per-row follow the architecture; the
// left-aligned column placement and the load formats are choices of this RTL.
module om_pe_row
  import om_pkg::*;
#(
  parameter int unsigned COLS      = 16,
  parameter int unsigned RGF_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  op_e         op,
  input  fn_e         fn,
  input  logic [3:0]  order,
  input  logic [5:0]  ncols,     // N of the circular convolution
  input  logic [COLS-1:0] col_en,
  input  logic        clear,
  // elements selected by this row's window
  input  logic        s_valid,
  input  word_t       s_data,
  input  tag_t        s_li,
  input  tag_t        s_lj,
  // Pade results
  output logic        res_valid,
  output word_t       res_data,
  output tag_t        res_tag,
  // accumulators for the drain
  output word_t       acc [COLS],
  output logic        busy
);
  localparam int unsigned RI = $clog2(RGF_DEPTH);

  logic [1:0] mode [COLS];
  logic       rgf_we [COLS], a_we [COLS], in_valid [COLS], ch_valid [COLS];
  logic [RI-1:0] rgf_waddr [COLS], in_ridx [COLS];
  word_t      ch_x [COLS], ch_pow [COLS], ch_sum [COLS];
  tag_t       ch_tag [COLS];
  logic       vo [COLS], pe_busy [COLS];
  word_t      xo [COLS], po [COLS], so [COLS];
  tag_t       to [COLS];
  word_t      a0_q;

  logic [4:0] m;
  assign m = {1'b0, order};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) a0_q <= '0;
    else if (op == OP_LOADC && s_valid && s_lj == '0) a0_q <= s_data;
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic pade_col;
    logic [5:0] cc;
    assign cc = 6'(c);
    assign pade_col = (5'(c) < 5'(2 * m));

    always_comb begin
      mode[c]      = 2'd0;
      rgf_we[c]    = 1'b0;
      rgf_waddr[c] = '0;
      a_we[c]      = 1'b0;
      in_valid[c]  = 1'b0;
      in_ridx[c]   = '0;
      unique case (op)
        OP_LOADW: begin
          rgf_we[c]    = s_valid && (s_lj == tag_t'(c));
          rgf_waddr[c] = RI'(s_li);
        end
        OP_LOADV: begin
          rgf_we[c]    = s_valid;
          rgf_waddr[c] = RI'(s_lj);
        end
        OP_LOADC: a_we[c] = s_valid && (s_lj == tag_t'(c + 1));
        OP_GEMM: begin
          mode[c]     = col_en[c] ? 2'd1 : 2'd0;
          in_valid[c] = s_valid;
          in_ridx[c]  = RI'(s_lj);
        end
        OP_CCONV: begin
          mode[c]     = col_en[c] ? 2'd1 : 2'd0;
          in_valid[c] = s_valid;
          // (c - lj) mod N, with 0 <= lj < N
          in_ridx[c]  = (cc >= 6'(s_lj)) ? RI'(cc - 6'(s_lj)) : RI'(cc + ncols - 6'(s_lj));
        end
        OP_ELEM: begin
          mode[c]     = col_en[c] ? 2'd2 : 2'd0;
          in_valid[c] = s_valid && (s_lj == tag_t'(c));
          in_ridx[c]  = RI'(c);
        end
        OP_PADE: mode[c] = (pade_col && col_en[c]) ? 2'd3 : 2'd0;
        default: ;
      endcase
    end

    // chain wiring: PE 0 and PE m start a chain, the others follow their left neighbour
    if (c == 0) begin : g_head
      assign ch_valid[c] = (op == OP_PADE) && s_valid;
      assign ch_x[c]     = s_data;
      assign ch_pow[c]   = FX_ONE;
      assign ch_sum[c]   = a0_q;
      assign ch_tag[c]   = s_lj;
    end else begin : g_link
      logic head;
      assign head        = (5'(c) == m);
      assign ch_valid[c] = head ? ((op == OP_PADE) && s_valid) : vo[c-1];
      assign ch_x[c]     = head ? s_data : xo[c-1];
      assign ch_pow[c]   = head ? FX_ONE : po[c-1];
      assign ch_sum[c]   = head ? FX_ONE : so[c-1];
      assign ch_tag[c]   = head ? s_lj   : to[c-1];
    end

    om_pe #(.RGF_DEPTH(RGF_DEPTH)) u_pe (
      .clk, .rst_n,
      .mode(mode[c]), .fn, .clear,
      .rgf_we(rgf_we[c]), .rgf_waddr(rgf_waddr[c]), .rgf_wdata(s_data),
      .a_we(a_we[c]), .a_wdata(s_data),
      .in_valid(in_valid[c]), .in_x(s_data), .in_ridx(in_ridx[c]),
      .ch_valid(ch_valid[c]), .ch_x(ch_x[c]), .ch_pow(ch_pow[c]),
      .ch_sum(ch_sum[c]), .ch_tag(ch_tag[c]),
      .ch_valid_o(vo[c]), .ch_x_o(xo[c]), .ch_pow_o(po[c]), .ch_sum_o(so[c]),
      .ch_tag_o(to[c]), .busy(pe_busy[c]), .acc(acc[c])
    );
  end

  // end of the two chains -> divider
  logic  d_in_valid;
  word_t d_num, d_den;
  tag_t  d_tag;
  always_comb begin
    d_in_valid = 1'b0;
    d_num = '0; d_den = '0; d_tag = '0;
    for (int c = 0; c < COLS; c++) begin
      if (5'(c + 1) == m) begin
        d_in_valid = vo[c] && (op == OP_PADE);
        d_num      = so[c];
        d_tag      = to[c];
      end
      if (5'(c + 1) == 5'(2 * m)) d_den = so[c];
    end
  end

  om_divider u_div (
    .clk, .rst_n,
    .in_valid(d_in_valid), .num(d_num), .den(d_den), .in_tag(d_tag),
    .out_valid(res_valid), .quot(res_data), .out_tag(res_tag)
  );

  // elements inside the chains or the divider
  logic [7:0] inflight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else inflight <= inflight + 8'(ch_valid[0]) - 8'(res_valid);
  end
  always_comb begin
    busy = (inflight != '0);
    for (int c = 0; c < COLS; c++) busy |= pe_busy[c];
  end

endmodule
