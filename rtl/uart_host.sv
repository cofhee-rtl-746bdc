// uart_host -- primary UART (UART-M): lets an external host read and write
// any bus address (memories and registers) over a serial line.
//
// Frames are 8N1, each bit div clock cycles long (UARTM_BAUD_CTL).  The host
// sends a request:
//   'W' (0x57), 4 address bytes, 16 data bytes   -> 128-bit write, reply 'K'
//   'R' (0x52), 4 address bytes                  -> reply 16 data bytes
// Multi-byte fields go least significant byte first.  Unknown request bytes
// are ignored.  The bridge is a bus master of the crossbar and holds its
// request until granted.  The received bit is sampled in the middle of each
// bit period after a two-flop synchroniser.
//
// The paper says only that the chip is loaded, triggered and read back over
// UART (and SPI); the byte protocol and the receiver are this design's.
module uart_host
  import cofhee_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] div,
  input  logic        rx,
  output logic        tx,
  output bus_req_t    m_req,
  input  bus_rsp_t    m_rsp
);
  // ------------------------------------------------------------- receiver
  logic        rx_s1, rx_s2;
  logic        rx_busy, rx_valid;
  logic [3:0]  rx_bit;
  logic [31:0] rx_cnt;
  logic [7:0]  rx_sh, rx_byte;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_s1 <= 1'b1; rx_s2 <= 1'b1; rx_busy <= 1'b0; rx_valid <= 1'b0;
      rx_bit <= '0; rx_cnt <= '0; rx_sh <= '0; rx_byte <= '0;
    end else begin
      rx_s1 <= rx; rx_s2 <= rx_s1;
      rx_valid <= 1'b0;
      if (!rx_busy) begin
        if (!rx_s2) begin rx_busy <= 1'b1; rx_bit <= '0; rx_cnt <= div >> 1; end
      end else if (rx_cnt + 1 >= div) begin
        rx_cnt <= '0;
        rx_bit <= rx_bit + 1'b1;
        if (rx_bit == 4'd0 && rx_s2) rx_busy <= 1'b0;          // false start
        else if (rx_bit >= 4'd1 && rx_bit <= 4'd8) rx_sh <= {rx_s2, rx_sh[7:1]};
        else if (rx_bit == 4'd9) begin
          rx_busy <= 1'b0;
          if (rx_s2) begin rx_valid <= 1'b1; rx_byte <= rx_sh; end
        end
      end else rx_cnt <= rx_cnt + 1'b1;
    end
  end

  // --------------------------------------------------------- transmitter
  logic       tx_send, tx_busy;
  logic [7:0] tx_data;
  uart_tx u_tx (.clk, .rst_n, .div, .send(tx_send), .data(tx_data), .busy(tx_busy), .tx);

  // -------------------------------------------------------- request engine
  typedef enum logic [2:0] {H_CMD, H_ADDR, H_DATA, H_BUS, H_WAIT, H_REPLY} state_e;
  state_e       st;
  logic         is_wr;
  logic [4:0]   nb;
  logic [31:0]  addr;
  logic [127:0] data;

  always_comb begin
    m_req       = '0;
    m_req.wstrb = '1;
    if (st == H_BUS) begin
      m_req.valid = 1'b1;
      m_req.write = is_wr;
      m_req.addr  = addr;
      m_req.wdata = data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= H_CMD; is_wr <= 1'b0; nb <= '0; addr <= '0; data <= '0;
      tx_send <= 1'b0; tx_data <= '0;
    end else begin
      tx_send <= 1'b0;
      case (st)
        H_CMD: if (rx_valid && (rx_byte == 8'h57 || rx_byte == 8'h52)) begin
          is_wr <= (rx_byte == 8'h57); nb <= '0; st <= H_ADDR;
        end
        H_ADDR: if (rx_valid) begin
          addr <= {rx_byte, addr[31:8]};
          nb   <= nb + 1'b1;
          if (nb == 5'd3) begin nb <= '0; st <= is_wr ? H_DATA : H_BUS; end
        end
        H_DATA: if (rx_valid) begin
          data <= {rx_byte, data[127:8]};
          nb   <= nb + 1'b1;
          if (nb == 5'd15) begin nb <= '0; st <= H_BUS; end
        end
        H_BUS: if (m_rsp.gnt) st <= is_wr ? H_REPLY : H_WAIT;
        H_WAIT: begin data <= m_rsp.rdata; nb <= '0; st <= H_REPLY; end
        H_REPLY: if (!tx_busy && !tx_send) begin
          tx_send <= 1'b1;
          if (is_wr) begin tx_data <= 8'h4B; st <= H_CMD; end
          else begin
            tx_data <= data[7:0];
            data    <= {8'h00, data[127:8]};
            nb      <= nb + 1'b1;
            if (nb == 5'd15) st <= H_CMD;
          end
        end
        default: st <= H_CMD;
      endcase
    end
  end
endmodule
