// om_divider: fixed-point divider that completes a Pade rational function.
//
// q = (num << FRAC) / den in signed fixed point with FRAC fraction bits,
// truncated toward zero and saturated to the DW-bit range.  A zero
// denominator returns the largest value with the sign of the numerator.
// The architecture places one divider per PE row so that all rows can divide
// in parallel with a deterministic latency; how the divider works inside is
// not given, and this RTL uses the simplest pipelined form: a restoring
// divider with one quotient bit per stage, DW+FRAC stages plus an input and
// an output register.  It accepts one division per cycle and returns it
// exactly DIV_LATENCY (om_pkg) cycles later together with its tag.
module om_divider
  import om_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t num,
  input  word_t den,
  input  tag_t  in_tag,
  output logic  out_valid,
  output word_t quot,
  output tag_t  out_tag
);
  localparam int unsigned NB = DW + FRAC;      // dividend / quotient bits
  localparam int unsigned NST = NB;            // one bit per stage


  typedef struct packed {
    logic          v;
    logic          neg;      // sign of the result
    logic          dz;       // divide by zero
    logic [DW:0]   rem;      // partial remainder
    logic [NB-1:0] dvd;      // remaining dividend bits (MSB first)
    logic [NB-1:0] q;        // quotient bits so far
    logic [DW-1:0] d;        // |den|
    tag_t          tag;
  } st_t;

  st_t st [NST+1];

  // input register: magnitudes and sign
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st[0] <= '0;
    else begin
      st[0].v   <= in_valid;
      st[0].neg <= num[DW-1] ^ den[DW-1];
      st[0].dz  <= (den == '0);
      st[0].rem <= '0;
      st[0].dvd <= {(num[DW-1] ? DW'(-num) : DW'(num)), FRAC'(0)};
      st[0].q   <= '0;
      st[0].d   <= den[DW-1] ? DW'(-den) : DW'(den);
      st[0].tag <= in_tag;
      if (den == '0) st[0].neg <= num[DW-1];
    end
  end

  for (genvar i = 0; i < NST; i++) begin : g_stage
    logic [DW+1:0] trial;
    logic [DW:0]   shifted;
    assign shifted = {st[i].rem[DW-1:0], st[i].dvd[NB-1]};
    assign trial   = {1'b0, shifted} - {2'b0, st[i].d};
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) st[i+1] <= '0;
      else begin
        st[i+1]     <= st[i];
        st[i+1].dvd <= st[i].dvd << 1;
        if (!trial[DW+1]) begin
          st[i+1].rem <= trial[DW:0];
          st[i+1].q   <= {st[i].q[NB-2:0], 1'b1};
        end else begin
          st[i+1].rem <= shifted;
          st[i+1].q   <= {st[i].q[NB-2:0], 1'b0};
        end
      end
    end
  end

  // output register: saturate and apply the sign
  st_t last;
  assign last = st[NST];
  word_t res;
  always_comb begin
    if (last.dz || last.q > NB'(FX_MAX))
      res = last.neg ? FX_MIN : FX_MAX;
    else
      res = last.neg ? -word_t'(last.q[DW-1:0]) : word_t'(last.q[DW-1:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; quot <= '0; out_tag <= '0;
    end else begin
      out_valid <= last.v;
      quot      <= res;
      out_tag   <= last.tag;
    end
  end

endmodule
