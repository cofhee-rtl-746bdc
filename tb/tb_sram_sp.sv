// tb_sram_sp -- fills the single-port memory with random words, overwrites
// some lanes, reads everything back and checks it against a model; also
// checks that read data holds while the memory is idle.
module tb_sram_sp;
  import tb_util_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 512;
  logic en, we;
  logic [8:0] addr;
  u128 wdata, rdata;
  logic [3:0] wstrb;
  u128 model [D];

  sram_sp #(.DEPTH(D)) dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0; wstrb = '1;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 9'(i); wdata = rand128(); model[i] = wdata;
    end
    for (int i = 0; i < 40; i++) begin
      u128 v; logic [3:0] s; int ad;
      @(negedge clk); v = rand128(); s = 4'($urandom); ad = $urandom % D;
      en = 1; we = 1; addr = 9'(ad); wdata = v; wstrb = s;
      for (int l = 0; l < 4; l++) if (s[l]) model[ad][l*32 +: 32] = v[l*32 +: 32];
    end
    @(negedge clk); en = 0; we = 0; wstrb = '1;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); en = 1; we = 0; addr = 9'(i);
      @(negedge clk); en = 0;
      checks++; if (rdata !== model[i]) failures++;
      @(negedge clk);
      checks++; if (rdata !== model[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
