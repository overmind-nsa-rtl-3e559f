// tb_om_dma: self-checking test of the DMA engine against a DRAM model with
// random grant delays and an SRAM model behind a randomly stalling write
// port and read grant.  Copies DRAM -> SRAM and SRAM -> DRAM blocks and
// checks every word that arrives, the busy flag, and that nothing outside
// the block is written.
module tb_om_dma;
  import om_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, dram_req, dram_we, dram_gnt, dram_rvalid;
  instr_t instr;
  logic [31:0] dram_addr;
  word_t dram_wdata, dram_rdata;
  logic s_wvalid, s_wready, s_rreq, s_rgnt;
  addr_t s_waddr, s_raddr;
  word_t s_wdata, s_rdata;

  om_dma dut (.*);
  om_dram_model #(.WORDS(4096)) u_dram (
    .clk, .req(dram_req), .we(dram_we), .addr(dram_addr), .wdata(dram_wdata),
    .gnt(dram_gnt), .rvalid(dram_rvalid), .rdata(dram_rdata));

  word_t sram [4096];
  always_comb s_wready = s_wvalid && ($urandom_range(0, 2) != 0);
  always_comb s_rgnt   = s_rreq && ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    if (s_wvalid && s_wready) sram[s_waddr % 4096] <= s_wdata;
    if (s_rreq && s_rgnt) s_rdata <= sram[s_raddr % 4096];
  end

  int checks = 0, failures = 0;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic copy(op_e op, int da, int sa, int n);
    instr = '0; instr.op = op; instr.dram_addr = 32'(da); instr.dma_len = addr_t'(n);
    if (op == OP_DMA_IN) instr.dst_base = addr_t'(sa); else instr.src_base = addr_t'(sa);
    start = 1; @(posedge clk) #1; start = 0;
    check("busy after start", busy, n != 0);
    while (busy) @(posedge clk) #1;
  endtask

  initial begin
    start = 0; instr = '0;
    for (int i = 0; i < 4096; i++) begin sram[i] = word_t'(-1); u_dram.mem[i] = 32'(i * 17 + 5); end
    repeat (2) @(posedge clk) #1;
    rst_n = 1;
    copy(OP_DMA_IN, 100, 200, 50);
    for (int i = 190; i < 260; i++)
      check("dma in", sram[i], (i >= 200 && i < 250) ? (100 + i - 200) * 17 + 5 : -1);
    for (int i = 0; i < 30; i++) sram[1000 + i] = word_t'($urandom);
    copy(OP_DMA_OUT, 3000, 1000, 30);
    for (int i = 2990; i < 3040; i++)
      check("dma out", longint'($signed(u_dram.mem[i])), (i >= 3000 && i < 3030) ? sram[1000 + i - 3000] : i * 17 + 5);
    copy(OP_DMA_IN, 0, 0, 0);   // empty copy
    check("dram writes", u_dram.writes, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
