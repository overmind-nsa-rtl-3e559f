// om_dma: block-copy engine between the off-chip DRAM and the on-chip SRAM.
//
// OP_DMA_IN copies dma_len words from DRAM address dram_addr to SRAM address
// dst_base; OP_DMA_OUT copies dma_len words from SRAM address src_base to DRAM
// address dram_addr.  The controller launches a copy and goes on issuing
// compute instructions, so prefetching the next layer's data overlaps with
// computation; this is what lets the design keep a single SRAM level with no
// L2 between DRAM and the PE array.
//
// Interfaces (choices of this RTL; the architecture only names the DMA):
//   DRAM: request/grant; a read returns dram_rvalid/dram_rdata any number of
//         cycles after its grant, a write completes with its grant.
//   SRAM write: valid/ready through the writeback arbiter.
//   SRAM read:  request/grant through the read-port arbiter, data on the
//         cycle after the grant.
// One word is in flight at a time.
module om_dma
  import om_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  instr_t instr,
  output logic   busy,
  // DRAM
  output logic   dram_req,
  output logic   dram_we,
  output logic [DRAM_AW-1:0] dram_addr,
  output word_t  dram_wdata,
  input  logic   dram_gnt,
  input  logic   dram_rvalid,
  input  word_t  dram_rdata,
  // SRAM write (through the writeback arbiter)
  output logic   s_wvalid,
  output addr_t  s_waddr,
  output word_t  s_wdata,
  input  logic   s_wready,
  // SRAM read (through the read arbiter)
  output logic   s_rreq,
  output addr_t  s_raddr,
  input  logic   s_rgnt,
  input  word_t  s_rdata
);
  typedef enum logic [2:0] {D_IDLE, D_RREQ, D_RWAIT, D_SWR, D_SRD, D_SRDW, D_DWR} dstate_e;
  dstate_e st_q;
  logic [DRAM_AW-1:0] da_q;
  addr_t sa_q, left_q;
  word_t data_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= D_IDLE; da_q <= '0; sa_q <= '0; left_q <= '0; data_q <= '0;
    end else begin
      unique case (st_q)
        D_IDLE: if (start && instr.dma_len != '0) begin
          da_q   <= instr.dram_addr;
          left_q <= instr.dma_len;
          if (instr.op == OP_DMA_IN) begin
            sa_q <= instr.dst_base; st_q <= D_RREQ;
          end else begin
            sa_q <= instr.src_base; st_q <= D_SRD;
          end
        end
        D_RREQ:  if (dram_gnt) st_q <= D_RWAIT;
        D_RWAIT: if (dram_rvalid) begin data_q <= dram_rdata; st_q <= D_SWR; end
        D_SWR: if (s_wready) begin
          da_q <= da_q + 1'b1; sa_q <= sa_q + 1'b1; left_q <= left_q - 1'b1;
          st_q <= (left_q == addr_t'(1)) ? D_IDLE : D_RREQ;
        end
        D_SRD:  if (s_rgnt) st_q <= D_SRDW;
        D_SRDW: begin data_q <= s_rdata; st_q <= D_DWR; end
        D_DWR: if (dram_gnt) begin
          da_q <= da_q + 1'b1; sa_q <= sa_q + 1'b1; left_q <= left_q - 1'b1;
          st_q <= (left_q == addr_t'(1)) ? D_IDLE : D_SRD;
        end
        default: st_q <= D_IDLE;
      endcase
    end
  end

  assign busy       = (st_q != D_IDLE);
  assign dram_req   = (st_q == D_RREQ) || (st_q == D_DWR);
  assign dram_we    = (st_q == D_DWR);
  assign dram_addr  = da_q;
  assign dram_wdata = data_q;
  assign s_wvalid   = (st_q == D_SWR);
  assign s_waddr    = sa_q;
  assign s_wdata    = data_q;
  assign s_rreq     = (st_q == D_SRD);
  assign s_raddr    = sa_q;

endmodule
