// tb_uart_host -- plays the host side of the UART-M link.  The testbench
// serialises 'W' / 'R' frames onto rx, decodes reply bytes from tx, and
// models a bus slave (a 256-word memory that withholds the grant on random
// cycles).  Checks that written words land at the right address with all
// lanes, that reads return the stored words LSB byte first, and the 'K'
// acknowledge.
module tb_uart_host;
  import cofhee_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int DIV = 8;
  logic [31:0] div = DIV;
  logic rx = 1, tx;
  bus_req_t m_req;
  bus_rsp_t m_rsp;

  uart_host dut (.*);

  // bus slave model
  u128 mem [256];
  logic rv;
  u128 rd;
  int stalls = 0;
  always_comb begin
    m_rsp.gnt    = m_req.valid && ($urandom_range(0, 2) != 0);
    m_rsp.rvalid = rv;
    m_rsp.rdata  = rd;
  end
  always @(posedge clk) begin
    rv <= 1'b0;
    if (m_req.valid && !m_rsp.gnt) stalls++;
    if (m_req.valid && m_rsp.gnt) begin
      if (m_req.write) mem[m_req.addr[11:4]] <= m_req.wdata;
      else begin rv <= 1'b1; rd <= mem[m_req.addr[11:4]]; end
    end
  end

  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask
  task automatic put(logic [7:0] b);
    rx = 0; repeat (DIV) @(negedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (DIV) @(negedge clk); end
    rx = 1; repeat (DIV) @(negedge clk);
  endtask
  task automatic get(output logic [7:0] b);
    while (tx) @(negedge clk);
    repeat (DIV / 2) @(negedge clk);
    for (int i = 0; i < 8; i++) begin repeat (DIV) @(negedge clk); b[i] = tx; end
    repeat (DIV) @(negedge clk);
  endtask

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  u128 exp [256];
  initial begin
    logic [7:0] b;
    for (int i = 0; i < 256; i++) begin mem[i] = '0; exp[i] = '0; end
    rv = 0; rd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    for (int n = 0; n < 12; n++) begin
      int w; u128 v; logic [31:0] a;
      w = $urandom_range(0, 255); v = rand128(); a = 32'h2000_0000 | 32'(w << 4);
      put(8'h57);
      for (int i = 0; i < 4; i++) put(a[i*8 +: 8]);
      for (int i = 0; i < 16; i++) put(v[i*8 +: 8]);
      get(b); chk(b == 8'h4B, "write acknowledge");
      exp[w] = v;
      chk(mem[w] == v, "word written");
      // read back
      put(8'h52);
      for (int i = 0; i < 4; i++) put(a[i*8 +: 8]);
      v = '0;
      for (int i = 0; i < 16; i++) begin get(b); v[i*8 +: 8] = b; end
      chk(v == exp[w], "word read back");
    end
    chk(stalls > 0, "grant stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
