// om_pe: one processing element of the Overmind PE array.
//
// A PE holds a coefficient register A, a power register B, an accumulator C,
// a small local register file (RGF) and one multiplier plus one adder.  It
// runs in one of three modes, selected by the row it belongs to:
//
//   MAC   C <= C + RGF[ridx] * x             (integer, wraps; GEMM and circular
//                                             convolution; ridx is the remapped index)
//   ELEM  C <= f(x, RGF[ridx])               (add, sub, mul, max, min, relu)
//   PADE  one stage of an exponent-accumulation chain.  The stage receives
//         (x, p = x^(k-1), s) from its left neighbour and produces
//         (x, x^k, s + A*x^k).  Cycle 1 forms B = p*x, cycle 2 forms
//         C = s + A*B, both through the single multiplier, so a stage accepts
//         a new element every second cycle and has a latency of two cycles.
//         Fixed point with FRAC fraction bits, saturating.
//
// The A, B and C registers, the multiplier, the adder and the thread-data
// input follow the PE drawing of the architecture; the two-cycle sharing of
// the one multiplier between the power and the coefficient product, the
// register file depth and the element-wise function set are choices of this
// RTL.  Register-file and coefficient writes take effect at the next edge.
module om_pe
  import om_pkg::*;
#(
  parameter int unsigned RGF_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  logic [1:0]  mode,        // 0 idle, 1 MAC, 2 ELEM, 3 PADE
  input  fn_e         fn,
  input  logic        clear,       // zero C, B and the chain state
  // register file and coefficient load
  input  logic        rgf_we,
  input  logic [$clog2(RGF_DEPTH)-1:0] rgf_waddr,
  input  word_t       rgf_wdata,
  input  logic        a_we,
  input  word_t       a_wdata,
  // linear / element-wise operand
  input  logic        in_valid,
  input  word_t       in_x,
  input  logic [$clog2(RGF_DEPTH)-1:0] in_ridx,
  // Pade chain in
  input  logic        ch_valid,
  input  word_t       ch_x,
  input  word_t       ch_pow,
  input  word_t       ch_sum,
  input  tag_t        ch_tag,
  // Pade chain out
  output logic        ch_valid_o,
  output word_t       ch_x_o,
  output word_t       ch_pow_o,
  output word_t       ch_sum_o,
  output tag_t        ch_tag_o,
  output logic        busy,
  output word_t       acc
);
  localparam logic [1:0] M_MAC = 2'd1, M_ELEM = 2'd2, M_PADE = 2'd3;

  word_t a_q, b_q, c_q, x_q, s_q;
  tag_t  tag_q;
  logic  ph_q, vo_q;
  word_t rgf [RGF_DEPTH];

  // the single multiplier, operands chosen by mode and phase
  word_t mul_a, mul_b, operand;
  logic signed [2*DW-1:0] prod;
  assign operand = rgf[in_ridx];
  always_comb begin
    if (mode == M_PADE) begin
      mul_a = ph_q ? a_q : ch_pow;
      mul_b = ph_q ? b_q : ch_x;
    end else begin
      mul_a = operand;
      mul_b = in_x;
    end
    prod = (2*DW)'(mul_a) * (2*DW)'(mul_b);
  end

  word_t prod_fx;
  assign prod_fx = sat_word(prod >>> FRAC);

  function automatic word_t elem_f(fn_e f, word_t x, word_t v, word_t p);
    unique case (f)
      FN_ADD:  return v + x;
      FN_SUB:  return v - x;
      FN_MUL:  return p;
      FN_MAX:  return (x > v) ? x : v;
      FN_MIN:  return (x < v) ? x : v;
      FN_RELU: return (x > 0) ? x : '0;
      default: return x;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q <= '0; b_q <= '0; c_q <= '0; x_q <= '0; s_q <= '0;
      tag_q <= '0; ph_q <= 1'b0; vo_q <= 1'b0;
    end else begin
      vo_q <= 1'b0;
      if (a_we) a_q <= a_wdata;
      if (clear) begin
        b_q <= '0; c_q <= '0; ph_q <= 1'b0;
      end else begin
        unique case (mode)
          M_MAC:  if (in_valid) c_q <= c_q + word_t'(prod);
          M_ELEM: if (in_valid) c_q <= elem_f(fn, in_x, operand, word_t'(prod));
          M_PADE: begin
            if (!ph_q) begin
              if (ch_valid) begin
                b_q   <= prod_fx;      // x^k = x^(k-1) * x
                x_q   <= ch_x;
                s_q   <= ch_sum;
                tag_q <= ch_tag;
                ph_q  <= 1'b1;
              end
            end else begin
              c_q  <= fx_add(s_q, prod_fx);  // s + a_k * x^k
              ph_q <= 1'b0;
              vo_q <= 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rgf_we) rgf[rgf_waddr] <= rgf_wdata;
  end

  assign ch_valid_o = vo_q;
  assign ch_x_o     = x_q;
  assign ch_pow_o   = b_q;
  assign ch_sum_o   = c_q;
  assign ch_tag_o   = tag_q;
  assign busy       = ph_q | vo_q;
  assign acc        = c_q;

  // a chain stage must not be offered a new element while it is in its second phase
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (mode == M_PADE && ph_q && !clear) |-> !ch_valid);

endmodule
