// om_dram_model: behavioural model of the off-chip DRAM, for testbenches only.
// Request/grant port: a request is granted after 0..MAX_GNT_WAIT idle
// cycles (pseudo-random); a granted read returns its word READ_LAT cycles
// after the grant on rvalid/rdata; a granted write is stored at the grant.
// The contents are reachable from a testbench as mem[].  Not synthesizable.
module om_dram_model #(
  parameter int unsigned WORDS        = 65536,
  parameter int unsigned READ_LAT     = 6,
  parameter int unsigned MAX_GNT_WAIT = 3
) (
  input  logic        clk,
  input  logic        req,
  input  logic        we,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic        gnt,
  output logic        rvalid,
  output logic [31:0] rdata
);
  logic [31:0] mem [WORDS];
  int unsigned wait_left = 0;
  logic [READ_LAT-1:0] rv_pipe = '0;
  logic [31:0] rd_pipe [READ_LAT];
  int unsigned reads = 0, writes = 0;

  initial for (int i = 0; i < WORDS; i++) mem[i] = '0;

  always_comb gnt = req && (wait_left == 0);

  always @(posedge clk) begin
    if (req && wait_left == 0) begin
      if (we) begin mem[addr % WORDS] <= wdata; writes++; end
      else reads++;
      wait_left <= $urandom_range(0, MAX_GNT_WAIT);
    end else if (req) wait_left <= wait_left - 1;
    rv_pipe <= {rv_pipe[READ_LAT-2:0], req && gnt && !we};
    rd_pipe[0] <= mem[addr % WORDS];
    for (int i = 1; i < READ_LAT; i++) rd_pipe[i] <= rd_pipe[i-1];
  end
  assign rvalid = rv_pipe[READ_LAT-1];
  assign rdata  = rd_pipe[READ_LAT-1];
endmodule
