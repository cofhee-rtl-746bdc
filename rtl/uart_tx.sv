// uart_tx -- transmit-only UART (8 data bits, no parity, 1 stop bit).
//
// Used as the secondary UART (UART-S), which tells the host that the queued
// computation has finished.  send (1 cycle) with data starts a frame when
// not busy; each bit lasts div clock cycles (div >= 1, from the baud control
// register).  tx idles high; start bit 0, data LSB first, stop bit 1.
// The paper names a secondary UART with TX pad, baud and control registers
// and uses a UART link to receive the completion signal; the frame format
// and baud divider are this design's choice.
module uart_tx (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] div,
  input  logic        send,
  input  logic [7:0]  data,
  output logic        busy,
  output logic        tx
);
  logic [9:0]  sh;
  logic [3:0]  nbits;
  logic [31:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh <= '1; nbits <= '0; cnt <= '0; tx <= 1'b1;
    end else if (nbits == 4'd0) begin
      tx <= 1'b1;
      if (send) begin
        sh <= {1'b1, data, 1'b0}; nbits <= 4'd10; cnt <= '0;
      end
    end else begin
      tx <= sh[0];
      if (cnt + 1 >= div) begin
        cnt <= '0; sh <= {1'b1, sh[9:1]}; nbits <= nbits - 1'b1;
      end else cnt <= cnt + 1'b1;
    end
  end
  assign busy = (nbits != 4'd0);
endmodule
