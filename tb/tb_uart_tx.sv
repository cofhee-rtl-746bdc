// tb_uart_tx -- sends random bytes through the 8N1 transmitter at two
// divider settings, decodes the serial line in the testbench by sampling in
// the middle of each bit, and checks start bit, data bits (LSB first), stop
// bit, the busy flag and the frame length (10 * div cycles).
module tb_uart_tx;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] div;
  logic send, busy, tx;
  logic [7:0] data;

  uart_tx dut (.*);

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    send = 0; data = 0; div = 4;
    repeat (3) @(negedge clk); rst_n = 1;
    chk(tx == 1'b1 && !busy, "idle line high");
    for (int d = 0; d < 2; d++) begin
      div = d ? 32'd7 : 32'd4;
      for (int n = 0; n < 20; n++) begin
        logic [7:0] b, got;
        int t0, len;
        b = 8'($urandom);
        @(negedge clk); send = 1; data = b;
        @(negedge clk); send = 0; data = 8'hxx;
        chk(busy, "busy after send");
        // start bit begins on the edge after send; sample mid-bit
        repeat (int'(div) / 2) @(negedge clk);
        chk(tx == 1'b0, "start bit");
        for (int i = 0; i < 8; i++) begin
          repeat (int'(div)) @(negedge clk);
          got[i] = tx;
        end
        repeat (int'(div)) @(negedge clk);
        chk(tx == 1'b1, "stop bit");
        chk(got == b, $sformatf("data %h got %h", b, got));
        len = 0;
        while (busy) begin @(negedge clk); len++; end
        chk(len <= int'(div), "frame length");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
