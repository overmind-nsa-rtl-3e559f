// tb_om_sram: self-checking test of the on-chip SRAM.
// Writes random words to random addresses while reading others, and checks
// every read against a model array: data one cycle after the request, old
// data when reading and writing the same word in one cycle, and the held
// output when no read is requested.
module tb_om_sram;
  import om_pkg::*;
  localparam int W = 8192;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re, we;
  addr_t raddr, waddr;
  word_t rdata, wdata;
  om_sram #(.WORDS(W)) dut (.*);

  int checks = 0, failures = 0;
  word_t model [W];
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t exp_r;
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    // fill everything once
    for (int a = 0; a < W; a++) begin
      model[a] = word_t'($urandom);
      we = 1; waddr = addr_t'(a); wdata = model[a];
      @(posedge clk) #1;
    end
    we = 0;
    for (int i = 0; i < 4000; i++) begin
      int ra, wa;
      ra = $urandom_range(0, 63);          // small range to hit collisions
      wa = (i % 5 == 0) ? ra : $urandom_range(0, 63);
      re = 1; raddr = addr_t'(ra);
      we = ($urandom_range(0, 1) == 1); waddr = addr_t'(wa); wdata = word_t'($urandom);
      exp_r = model[ra];
      @(posedge clk) #1;
      if (we) model[wa] = wdata;
      check("read", rdata, exp_r);
      // no read: output holds
      re = 0; we = 0;
      @(posedge clk) #1;
      check("hold", rdata, exp_r);
    end
    // a few far addresses
    for (int i = 0; i < 200; i++) begin
      int ra;
      ra = $urandom_range(0, W - 1);
      re = 1; raddr = addr_t'(ra); @(posedge clk) #1; re = 0;
      check("far read", rdata, model[ra]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
