// tb_barrett_modmul -- checks a*b mod q and the raw product of the Barrett
// multiplier against bit-serial reference arithmetic, for the 128-bit test
// modulus and a 61-bit modulus, one operand pair per cycle, and checks the
// five-cycle latency.
module tb_barrett_modmul;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         in_valid;
  u128          a, b, q, r, prod;
  logic [159:0] mu;
  logic [8:0]   k;
  logic         out_valid;

  barrett_modmul dut (.clk, .rst_n, .in_valid, .a, .b, .q, .mu, .k, .out_valid, .r, .prod);

  u128 exp_r[$], exp_p[$];
  int  issue_cyc[$];
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    u128 er, ep; int ic;
    er = exp_r.pop_front(); ep = exp_p.pop_front(); ic = issue_cyc.pop_front();
    checks++;
    if (r !== er || prod !== ep || (cyc - ic) != 5) begin
      failures++;
      $display("FAIL r=%h exp=%h prod=%h exp=%h lat=%0d", r, er, prod, ep, cyc - ic);
    end
  end

  task automatic run(u128 qq, int kk, int count);
    q = qq; k = 9'(kk); mu = barrett_mu(qq, kk);
    for (int i = 0; i < count; i++) begin
      u128 x, y;
      x = rand128() % qq; y = rand128() % qq;
      if (i == 0) begin x = qq - 1; y = qq - 1; end
      if (i == 1) begin x = 0; y = qq - 1; end
      @(negedge clk);
      in_valid = 1; a = x; b = y;
      exp_r.push_back(mulmod(x, y, qq));
      exp_p.push_back(x * y);
      issue_cyc.push_back(cyc);
    end
    @(negedge clk); in_valid = 0;
    repeat (8) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; a = 0; b = 0; q = TEST_Q; mu = 0; k = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(TEST_Q, 256, 200);
    run(128'h1fffffffffffc001 + 128'h0, 122, 100);  // 61-bit odd modulus, k = 2*61
    repeat (4) @(negedge clk);
    if (exp_r.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
