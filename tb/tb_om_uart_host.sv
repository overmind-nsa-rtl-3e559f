// tb_om_uart_host: self-checking test of the UART host link.
// Sends 8N1 frames at 8 clocks per bit: SRAM write commands, an instruction
// push and SRAM read commands, with a stalling ready/grant on the far side.
// Checks every write (address, data), the pushed instruction bit for bit,
// the read address, and decodes the four reply bytes from tx.
module tb_om_uart_host;
  import om_pkg::*;
  localparam int CPB = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rx, tx, wvalid, wready, ivalid, iready, rreq, rgnt;
  addr_t waddr, raddr;
  word_t wdata, rdata;
  instr_t instr;
  om_uart_host #(.CLKS_PER_BIT(CPB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // far side: random stalls; read data = ~address
  always_comb wready = wvalid && ($urandom_range(0, 3) == 0);
  always_comb iready = ivalid && ($urandom_range(0, 3) == 0);
  always_comb rgnt   = rreq && ($urandom_range(0, 3) == 0);
  always @(posedge clk) if (rgnt) rdata <= ~word_t'(raddr);

  // capture of accepted requests
  addr_t  got_waddr [$]; word_t got_wdata [$]; instr_t got_instr [$]; addr_t got_raddr [$];
  always @(negedge clk) begin
    if (wvalid && wready) begin got_waddr.push_back(waddr); got_wdata.push_back(wdata); end
    if (ivalid && iready) got_instr.push_back(instr);
    if (rreq && rgnt) got_raddr.push_back(raddr);
  end

  // tx decoder
  logic [7:0] tx_bytes [$];
  initial begin
    forever begin
      logic [7:0] b;
      @(negedge tx);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = tx; end
      repeat (CPB) @(posedge clk);
      checks++;
      if (tx !== 1'b1) begin failures++; $display("FAIL stop bit"); end
      tx_bytes.push_back(b);
    end
  end

  task automatic send_byte(logic [7:0] b);
    rx = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(posedge clk); end
    rx = 1; repeat (CPB) @(posedge clk);
  endtask

  initial begin
    instr_t ins;
    logic [167:0] ib;
    int nib;
    rx = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    // three writes
    for (int k = 0; k < 3; k++) begin
      logic [15:0] a; logic [31:0] d;
      a = 16'($urandom); d = $urandom;
      send_byte(8'h01); send_byte(a[15:8]); send_byte(a[7:0]);
      send_byte(d[31:24]); send_byte(d[23:16]); send_byte(d[15:8]); send_byte(d[7:0]);
      repeat (20) @(posedge clk);
      check("write count", got_waddr.size(), k + 1);
      if (got_waddr.size() == k + 1) begin
        check("waddr", got_waddr[k], a);
        check("wdata", got_wdata[k], $signed(d));
      end
    end
    // a stray byte is ignored
    send_byte(8'h77);
    // instruction push
    ins = '0; ins.op = OP_PADE; ins.order = 4'd5; ins.rows = 7'd2; ins.src_base = 16'h1234;
    ins.len = 16'd99; ins.dst_base = 16'h0ABC; ins.dram_addr = 32'hDEADBEEF; ins.dma_len = 16'h55;
    nib = ($bits(instr_t) + 7) / 8;
    ib = 168'(ins);
    send_byte(8'h02);
    for (int k = nib - 1; k >= 0; k--) send_byte(ib[8*k +: 8]);
    repeat (20) @(posedge clk);
    check("instr count", got_instr.size(), 1);
    if (got_instr.size() == 1) check("instr bits", (got_instr[0] == ins), 1);
    // two reads
    for (int k = 0; k < 2; k++) begin
      logic [15:0] a; logic [31:0] d;
      a = 16'($urandom);
      send_byte(8'h03); send_byte(a[15:8]); send_byte(a[7:0]);
      repeat (50 * CPB) @(posedge clk);
      check("read addr", got_raddr[k], a);
      check("reply bytes", tx_bytes.size(), 4 * (k + 1));
      if (tx_bytes.size() == 4 * (k + 1)) begin
        d = {tx_bytes[4*k], tx_bytes[4*k+1], tx_bytes[4*k+2], tx_bytes[4*k+3]};
        check("reply data", d, {16'hFFFF, ~a});
      end
    end
    check("no extra writes", got_waddr.size(), 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
