// om_writeback: owner of the SRAM write port.
//
// Four sources write the single-level SRAM: the rows' dividers (Pade results),
// the controller's accumulator drain, the DMA engine (DRAM -> SRAM copies)
// and the host.  Fixed priority in that order.  Pade results and the drain
// never wait: the broadcast sends consecutive elements to different rows and
// every row has the same fixed latency, so at most one divider produces a
// result per cycle (checked by an assertion), and the drain only runs once
// the rows are empty.  The DMA engine and the host hold their request until
// they see ready.
//
// A Pade result of row r with column tag j is written to
// dst_base + r * dst_stride + j.  Timing: combinational from the requests to
// the SRAM write port; the write happens at the next clock edge.
// The architecture does not say how results return to SRAM; this block is this
// RTL's own.
module om_writeback
  import om_pkg::*;
#(
  parameter int unsigned ROWS = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  addr_t dst_base,
  input  addr_t dst_stride,
  input  logic  pd_valid [ROWS],
  input  word_t pd_data  [ROWS],
  input  tag_t  pd_tag   [ROWS],
  input  logic  dr_valid,
  input  addr_t dr_addr,
  input  word_t dr_data,
  input  logic  dma_wvalid,
  input  addr_t dma_waddr,
  input  word_t dma_wdata,
  output logic  dma_wready,
  input  logic  host_wvalid,
  input  addr_t host_waddr,
  input  word_t host_wdata,
  output logic  host_wready,
  output logic  we,
  output addr_t waddr,
  output word_t wdata
);
  logic  any_pd;
  logic [$clog2(ROWS+1)-1:0] n_pd;
  addr_t pd_addr;
  word_t pd_sel;
  always_comb begin
    any_pd  = 1'b0;
    n_pd    = '0;
    pd_addr = '0;
    pd_sel  = '0;
    for (int r = ROWS - 1; r >= 0; r--) begin
      if (pd_valid[r]) begin
        any_pd  = 1'b1;
        pd_addr = dst_base + addr_t'(r) * dst_stride + addr_t'(pd_tag[r]);
        pd_sel  = pd_data[r];
      end
    end
    for (int r = 0; r < ROWS; r++) n_pd += $bits(n_pd)'(pd_valid[r]);
  end

  always_comb begin
    we = 1'b1;
    dma_wready  = 1'b0;
    host_wready = 1'b0;
    if (any_pd) begin
      waddr = pd_addr; wdata = pd_sel;
    end else if (dr_valid) begin
      waddr = dr_addr; wdata = dr_data;
    end else if (dma_wvalid) begin
      waddr = dma_waddr; wdata = dma_wdata; dma_wready = 1'b1;
    end else begin
      waddr = host_waddr; wdata = host_wdata; host_wready = 1'b1;
      we = host_wvalid;
    end
  end

  a_one_result: assert property (@(posedge clk) disable iff (!rst_n) n_pd <= 1);
  a_pd_not_with_drain: assert property (@(posedge clk) disable iff (!rst_n) !(any_pd && dr_valid));

endmodule
