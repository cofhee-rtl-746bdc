// tb_cmd_fifo -- fills the 32-entry command queue, checks full, overflow
// and count, drains it in order, then runs random simultaneous push/pop
// traffic against a queue model.
module tb_cmd_fifo;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic push, pop, empty, full, overflow;
  logic [31:0] wdata, rdata;
  logic [5:0] count;
  logic [31:0] model[$];

  cmd_fifo dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    push = 0; pop = 0; wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); chk(empty && count == 0, "empty after reset");
    for (int i = 0; i < 32; i++) begin
      push = 1; wdata = $urandom; model.push_back(wdata); @(negedge clk);
    end
    push = 0;
    chk(full && count == 32, "full at 32");
    push = 1; wdata = 32'hdead; #1; chk(overflow, "overflow on push into full"); @(negedge clk); push = 0;
    chk(count == 32, "count stays 32");
    for (int i = 0; i < 32; i++) begin
      chk(rdata == model.pop_front(), "order"); pop = 1; @(negedge clk); pop = 0;
    end
    chk(empty, "empty after drain");
    for (int i = 0; i < 2000; i++) begin
      logic pu, po;
      pu = $urandom_range(0, 1) == 1 && model.size() < 32;
      po = $urandom_range(0, 1) == 1 && model.size() > 0;
      push = pu; pop = po; wdata = $urandom;
      if (po) chk(rdata == model[0], "random order");
      @(negedge clk);
      if (po) void'(model.pop_front());
      if (pu) model.push_back(wdata);
      chk(count == 6'(model.size()), "count");
    end
    push = 0; pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
