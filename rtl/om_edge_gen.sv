// om_edge_gen: SRAM read-address generator that drives the broadcast bus.
//
// It walks a 2D tensor region of nlines lines x len elements and reads one
// word per issue slot at  address = line start + line id * line size + column,
// i.e. base + line * stride + col.  The word comes back from the SRAM one cycle
// later and is put on the broadcast bus together with its (line, column) tag,
// which the rows' dual-window filters compare against their windows.
//
// Order: row-major (line by line) or column-major (column by column across
// lines).  Column-major is used for Pade so that consecutive elements go to
// different rows; issue_2 inserts one idle slot after every element (needed
// when a single row runs a Pade chain, which takes an element every second
// cycle).
//
// Segment output: the range of lines the bus covers right now -- the current
// line in row-major order, all lines in column-major order.  The rows use it
// to build the row-enable mask.
//
// Timing: start is a one-cycle pulse; the first word appears on b_valid two
// cycles later; busy stays high until the last word has been broadcast.
// The address arithmetic follows the edge-generator drawing (line start, line
// size, line ID, location); the ordering options are choices of this RTL.
// b_data is the SRAM's registered read data, driven onto the bus as it is;
// the tags are delayed to line up with it.
module om_edge_gen
  import om_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t base,
  input  addr_t stride,
  input  tag_t  nlines,
  input  tag_t  len,
  input  logic  col_major,
  input  logic  issue_2,
  // SRAM read port
  output logic  re,
  output addr_t raddr,
  input  word_t rdata,
  // broadcast bus
  output logic  b_valid,
  output tag_t  b_line,
  output tag_t  b_col,
  output word_t b_data,
  output tag_t  seg_lo,
  output tag_t  seg_hi,
  output logic  busy
);
  logic  run_q, gap_q, cm_q, i2_q;
  tag_t  line_q, col_q, nl_q, len_q;
  addr_t base_q, stride_q, laddr_q;
  logic  v1_q;
  tag_t  l1_q, c1_q;

  logic  issue, last_col, last_line;
  assign issue     = run_q && !gap_q;
  assign last_col  = (col_q == len_q - 1'b1);
  assign last_line = (line_q == nl_q - 1'b1);

  assign re    = issue;
  assign raddr = laddr_q + addr_t'(col_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q <= 1'b0; gap_q <= 1'b0; cm_q <= 1'b0; i2_q <= 1'b0;
      line_q <= '0; col_q <= '0; nl_q <= '0; len_q <= '0;
      base_q <= '0; stride_q <= '0; laddr_q <= '0;
      v1_q <= 1'b0; l1_q <= '0; c1_q <= '0;
    end else begin
      v1_q <= issue;
      l1_q <= line_q;
      c1_q <= col_q;
      if (start) begin
        run_q   <= (nlines != '0) && (len != '0);
        gap_q   <= 1'b0;
        cm_q    <= col_major;
        i2_q    <= issue_2;
        line_q  <= '0;
        col_q   <= '0;
        nl_q    <= nlines;
        len_q   <= len;
        base_q  <= base;
        stride_q <= stride;
        laddr_q <= base;
      end else if (run_q) begin
        if (gap_q) gap_q <= 1'b0;
        else begin
          gap_q <= i2_q;
          if (!cm_q) begin
            // row-major
            if (last_col) begin
              col_q   <= '0;
              line_q  <= line_q + 1'b1;
              laddr_q <= laddr_q + stride_q;
              if (last_line) run_q <= 1'b0;
            end else col_q <= col_q + 1'b1;
          end else begin
            // column-major
            if (last_line) begin
              line_q  <= '0;
              col_q   <= col_q + 1'b1;
              laddr_q <= base_q;
              if (last_col) run_q <= 1'b0;
            end else begin
              line_q  <= line_q + 1'b1;
              laddr_q <= laddr_q + stride_q;
            end
          end
        end
      end
    end
  end

  assign b_valid = v1_q;
  assign b_line  = l1_q;
  assign b_col   = c1_q;
  assign b_data  = rdata;
  assign seg_lo  = cm_q ? '0 : l1_q;
  assign seg_hi  = cm_q ? nl_q - 1'b1 : l1_q;
  assign busy    = run_q || v1_q;

endmodule
