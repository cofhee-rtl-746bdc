// tb_sram_dp -- writes random words through both ports of the dual-port
// memory in the same cycles, overwrites lanes with masked writes, and reads
// everything back through both ports at once, checking against a model.
module tb_sram_dp;
  import tb_util_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 256;
  logic en_a, we_a, en_b, we_b;
  logic [7:0] addr_a, addr_b;
  u128 wdata_a, wdata_b, rdata_a, rdata_b;
  logic [3:0] wstrb_a, wstrb_b;
  u128 model [D];

  sram_dp #(.DEPTH(D)) dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    en_a = 0; en_b = 0; we_a = 0; we_b = 0; wstrb_a = '1; wstrb_b = '1; addr_a = 0; addr_b = 0;
    wdata_a = 0; wdata_b = 0;
    for (int i = 0; i < D; i += 2) begin
      @(negedge clk);
      en_a = 1; we_a = 1; addr_a = 8'(i);     wdata_a = rand128(); model[i] = wdata_a;
      en_b = 1; we_b = 1; addr_b = 8'(i + 1); wdata_b = rand128(); model[i + 1] = wdata_b;
    end
    for (int i = 0; i < 32; i++) begin
      u128 v; logic [3:0] s; int ad;
      @(negedge clk);
      en_a = 0; v = rand128(); s = 4'($urandom); ad = $urandom % D;
      en_b = 1; we_b = 1; addr_b = 8'(ad); wdata_b = v; wstrb_b = s;
      for (int l = 0; l < 4; l++) if (s[l]) model[ad][l*32 +: 32] = v[l*32 +: 32];
    end
    @(negedge clk); en_b = 0; we_b = 0; wstrb_b = '1;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      en_a = 1; we_a = 0; addr_a = 8'(i);
      en_b = 1; we_b = 0; addr_b = 8'(D - 1 - i);
      @(negedge clk);
      en_a = 0; en_b = 0;
      checks += 2;
      if (rdata_a !== model[i]) failures++;
      if (rdata_b !== model[D - 1 - i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
