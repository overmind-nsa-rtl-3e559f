// om_sram: the single-level on-chip SRAM (32 KB = 8192 words of 32 bits).
//
// One read port and one write port.  A read returns its word on the cycle
// after the request (registered output); a write is visible to reads issued
// on the following cycles.  Reading and writing the same word in one cycle
// returns the old word.  The architecture keeps only this one level of SRAM
// and no L2; the two-port organisation and word width are choices of this RTL,
// written as an array so that synthesis can map it onto an SRAM macro.
module om_sram
  import om_pkg::*;
#(
  parameter int unsigned WORDS = 8192
) (
  input  logic  clk,
  input  logic  re,
  input  addr_t raddr,
  output word_t rdata,
  input  logic  we,
  input  addr_t waddr,
  input  word_t wdata
);
  localparam int unsigned IW = $clog2(WORDS);
  word_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr[IW-1:0]];
    if (we) mem[waddr[IW-1:0]] <= wdata;
  end
endmodule
