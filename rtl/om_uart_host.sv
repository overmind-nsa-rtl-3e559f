// om_uart_host: UART link through which a host loads data and instructions.
//
// Serial format 8N1 (one start bit, eight data bits LSB first, one stop bit)
// at CLKS_PER_BIT clock cycles per bit.  The received byte stream is read as
// commands (multi-byte fields most significant byte first):
//   0x01 a1 a0 d3 d2 d1 d0   write SRAM word a = d
//   0x02 b0 .. b(IB-1)       push one instruction (IB = bytes of instr_t,
//                            first byte holds the most significant bits)
//   0x03 a1 a0               read SRAM word a; the four data bytes are sent
//                            back on tx, most significant first
// Other command bytes are ignored.  The architecture only states that the
// device is programmed over UART; the framing and the command set are this
// RTL's own.  Outputs are valid/ready (or request/grant for reads, data on
// the cycle after the grant) and hold until accepted.
module om_uart_host
  import om_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   rx,
  output logic   tx,
  // SRAM write
  output logic   wvalid,
  output addr_t  waddr,
  output word_t  wdata,
  input  logic   wready,
  // instruction push
  output logic   ivalid,
  output instr_t instr,
  input  logic   iready,
  // SRAM read
  output logic   rreq,
  output addr_t  raddr,
  input  logic   rgnt,
  input  word_t  rdata
);
  localparam int unsigned IB = ($bits(instr_t) + 7) / 8;
  localparam int unsigned CW = $clog2(CLKS_PER_BIT * 3 / 2 + 1);

  // ------------------------------------------------------------ receiver
  logic [1:0]    rx_sync;
  logic          rx_busy;
  logic [CW-1:0] rx_cnt;
  logic [3:0]    rx_bit;
  logic [7:0]    rx_sh;
  logic          byte_v;
  logic [7:0]    byte_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_sync <= 2'b11; rx_busy <= 1'b0; rx_cnt <= '0; rx_bit <= '0;
      rx_sh <= '0; byte_v <= 1'b0; byte_d <= '0;
    end else begin
      rx_sync <= {rx_sync[0], rx};
      byte_v  <= 1'b0;
      if (!rx_busy) begin
        if (!rx_sync[1]) begin
          // start bit seen: sample the first data bit 1.5 bit times later
          rx_busy <= 1'b1;
          rx_cnt  <= CW'(CLKS_PER_BIT + CLKS_PER_BIT / 2 - 1);
          rx_bit  <= '0;
        end
      end else if (rx_cnt != '0) begin
        rx_cnt <= rx_cnt - 1'b1;
      end else if (rx_bit < 4'd8) begin
        rx_sh  <= {rx_sync[1], rx_sh[7:1]};
        rx_bit <= rx_bit + 1'b1;
        rx_cnt <= CW'(CLKS_PER_BIT - 1);
      end else begin
        // stop bit
        rx_busy <= 1'b0;
        if (rx_sync[1]) begin
          byte_v <= 1'b1;
          byte_d <= rx_sh;
        end
      end
    end
  end

  // ------------------------------------------------------------ command parser
  typedef enum logic [2:0] {P_CMD, P_WR, P_INS, P_RD, P_WAIT_W, P_WAIT_I, P_WAIT_R, P_SEND} pstate_e;
  pstate_e ps_q;
  logic [7:0] need_q;
  logic [IB*8-1:0] sh_q;
  logic [31:0] rd_word_q;
  logic [2:0]  tx_left_q;
  logic        rd_data_q;

  // transmitter handshake
  logic       tx_start, tx_busy;
  logic [7:0] tx_byte;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ps_q <= P_CMD; need_q <= '0; sh_q <= '0; rd_word_q <= '0; tx_left_q <= '0;
      rd_data_q <= 1'b0;
    end else begin
      rd_data_q <= 1'b0;
      unique case (ps_q)
        P_CMD: if (byte_v) begin
          unique case (byte_d)
            8'h01: begin ps_q <= P_WR;  need_q <= 8'd6; end
            8'h02: begin ps_q <= P_INS; need_q <= 8'(IB); end
            8'h03: begin ps_q <= P_RD;  need_q <= 8'd2; end
            default: ;
          endcase
        end
        P_WR, P_INS, P_RD: if (byte_v) begin
          sh_q   <= {sh_q[IB*8-9:0], byte_d};
          need_q <= need_q - 1'b1;
          if (need_q == 8'd1)
            ps_q <= (ps_q == P_WR) ? P_WAIT_W : (ps_q == P_INS) ? P_WAIT_I : P_WAIT_R;
        end
        P_WAIT_W: if (wready) ps_q <= P_CMD;
        P_WAIT_I: if (iready) ps_q <= P_CMD;
        P_WAIT_R: if (rgnt) begin rd_data_q <= 1'b1; ps_q <= P_SEND; tx_left_q <= 3'd4; end
        P_SEND: begin
          if (rd_data_q) rd_word_q <= rdata;
          else if (tx_left_q == '0) ps_q <= P_CMD;
          else if (tx_start) begin
            rd_word_q <= rd_word_q << 8;
            tx_left_q <= tx_left_q - 1'b1;
          end
        end
        default: ps_q <= P_CMD;
      endcase
    end
  end

  assign wvalid = (ps_q == P_WAIT_W);
  assign waddr  = addr_t'(sh_q[47:32]);
  assign wdata  = word_t'(sh_q[31:0]);
  assign ivalid = (ps_q == P_WAIT_I);
  assign instr  = instr_t'(sh_q[$bits(instr_t)-1:0]);
  assign rreq   = (ps_q == P_WAIT_R);
  assign raddr  = addr_t'(sh_q[15:0]);

  assign tx_start = (ps_q == P_SEND) && !rd_data_q && (tx_left_q != '0) && !tx_busy;
  assign tx_byte  = rd_word_q[31:24];

  // ------------------------------------------------------------ transmitter
  logic [9:0]    tx_sh;
  logic [3:0]    tx_bits;
  logic [CW-1:0] tx_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_sh <= '1; tx_bits <= '0; tx_cnt <= '0;
    end else if (tx_start) begin
      tx_sh   <= {1'b1, tx_byte, 1'b0};
      tx_bits <= 4'd10;
      tx_cnt  <= CW'(CLKS_PER_BIT - 1);
    end else if (tx_bits != '0) begin
      if (tx_cnt != '0) tx_cnt <= tx_cnt - 1'b1;
      else begin
        tx_sh   <= {1'b1, tx_sh[9:1]};
        tx_bits <= tx_bits - 1'b1;
        tx_cnt  <= CW'(CLKS_PER_BIT - 1);
      end
    end
  end
  assign tx_busy = (tx_bits != '0);
  assign tx      = tx_sh[0];

endmodule
