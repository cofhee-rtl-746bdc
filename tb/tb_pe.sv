// tb_pe -- drives the processing element in each of its four modes with
// random operands, one per cycle, and checks results, tags and latencies
// (add/sub 1, modular multiply 5, butterfly 6 cycles) against reference
// arithmetic; also checks the raw-product option.
module tb_pe;
  import cofhee_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, raw, out_valid;
  pe_mode_e mode;
  u128 a, b, w, q, out0, out1;
  logic [159:0] mu;
  logic [8:0] k;
  logic [25:0] in_tag, out_tag;

  pe dut (.clk, .rst_n, .in_valid, .mode, .raw, .a, .b, .w, .in_tag, .q, .mu, .k,
          .out_valid, .out0, .out1, .out_tag);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  u128 e0[$], e1[$];
  int  et[$], ec[$], lat_exp;
  logic two;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    u128 x0, x1; int t, c0;
    x0 = e0.pop_front(); x1 = e1.pop_front(); t = et.pop_front(); c0 = ec.pop_front();
    checks++;
    if (out0 !== x0 || (two && out1 !== x1) || out_tag !== 26'(t) || cyc - c0 != lat_exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL mode %0d out0 %h exp %h out1 %h exp %h lat %0d", mode, out0, x0, out1, x1, cyc - c0);
    end
  end

  task automatic run(pe_mode_e m, logic r, int cnt);
    mode = m; raw = r;
    lat_exp = (m == PE_MODADD || m == PE_MODSUB) ? 1 : (m == PE_MODMUL) ? 5 : 6;
    two = (m == PE_BUTTERFLY);
    for (int i = 0; i < cnt; i++) begin
      u128 x, y, z, p;
      x = rand128() % q; y = rand128() % q; z = rand128() % q;
      @(negedge clk);
      in_valid = 1; a = x; b = y; w = z; in_tag = 26'($urandom);
      case (m)
        PE_MODADD: begin e0.push_back(addmod(x, y, q)); e1.push_back(0); end
        PE_MODSUB: begin e0.push_back(submod(x, y, q)); e1.push_back(0); end
        PE_MODMUL: begin e0.push_back(r ? x * y : mulmod(x, y, q)); e1.push_back(0); end
        default: begin
          p = mulmod(y, z, q);
          e0.push_back(addmod(x, p, q)); e1.push_back(submod(x, p, q));
        end
      endcase
      et.push_back(int'(in_tag)); ec.push_back(cyc);
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; mode = PE_MODADD; raw = 0; a = 0; b = 0; w = 0; in_tag = 0;
    q = TEST_Q; k = 9'd256; mu = barrett_mu(TEST_Q, 256);
    repeat (3) @(negedge clk); rst_n = 1;
    run(PE_MODADD, 0, 50);
    run(PE_MODSUB, 0, 50);
    run(PE_MODMUL, 0, 50);
    run(PE_MODMUL, 1, 20);
    run(PE_BUTTERFLY, 0, 80);
    checks++; if (e0.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
