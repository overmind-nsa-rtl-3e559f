// tb_om_writeback: self-checking test of the SRAM write-port arbiter.
// Random mixes of a Pade result from one row, a drain write, a DMA write and
// a host write; checks which source owns the port (Pade, drain, DMA, host),
// the Pade address dst_base + row * dst_stride + tag, the data and the
// ready signals.
module tb_om_writeback;
  import om_pkg::*;
  localparam int R = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  addr_t dst_base, dst_stride, dr_addr, dma_waddr, host_waddr, waddr;
  logic pd_valid [R]; word_t pd_data [R]; tag_t pd_tag [R];
  logic dr_valid, dma_wvalid, dma_wready, host_wvalid, host_wready, we;
  word_t dr_data, dma_wdata, host_wdata, wdata;
  om_writeback #(.ROWS(R)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < R; r++) begin pd_valid[r] = 0; pd_data[r] = 0; pd_tag[r] = 0; end
    dr_valid = 0; dma_wvalid = 0; host_wvalid = 0;
    dr_addr = 0; dr_data = 0; dma_waddr = 0; dma_wdata = 0; host_waddr = 0; host_wdata = 0;
    dst_base = 0; dst_stride = 0;
    repeat (2) @(posedge clk) #1;
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int pr; bit pdv;
      dst_base = addr_t'($urandom_range(0, 4000)); dst_stride = addr_t'($urandom_range(1, 64));
      pdv = ($urandom_range(0, 3) == 0);
      pr = $urandom_range(0, R - 1);
      for (int r = 0; r < R; r++) begin
        pd_valid[r] = pdv && (r == pr);
        pd_data[r]  = word_t'($urandom);
        pd_tag[r]   = tag_t'($urandom_range(0, 31));
      end
      dr_valid = !pdv && ($urandom_range(0, 2) == 0);
      dr_addr = addr_t'($urandom); dr_data = word_t'($urandom);
      dma_wvalid = ($urandom_range(0, 1) == 1); dma_waddr = addr_t'($urandom); dma_wdata = word_t'($urandom);
      host_wvalid = ($urandom_range(0, 1) == 1); host_waddr = addr_t'($urandom); host_wdata = word_t'($urandom);
      #1;
      if (pdv) begin
        check("pd we", we, 1);
        check("pd addr", waddr, addr_t'(dst_base + addr_t'(pr) * dst_stride + addr_t'(pd_tag[pr])));
        check("pd data", wdata, pd_data[pr]);
        check("pd blocks dma", dma_wready, 0);
        check("pd blocks host", host_wready, 0);
      end else if (dr_valid) begin
        check("dr we", we, 1);
        check("dr addr", waddr, dr_addr);
        check("dr data", wdata, dr_data);
        check("dr blocks dma", dma_wready, 0);
      end else if (dma_wvalid) begin
        check("dma we", we, 1);
        check("dma addr", waddr, dma_waddr);
        check("dma data", wdata, dma_wdata);
        check("dma ready", dma_wready, 1);
        check("dma blocks host", host_wready, 0);
      end else begin
        check("host we", we, host_wvalid);
        check("host ready", host_wready, 1);
        if (host_wvalid) begin
          check("host addr", waddr, host_waddr);
          check("host data", wdata, host_wdata);
        end
      end
      @(posedge clk) #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
