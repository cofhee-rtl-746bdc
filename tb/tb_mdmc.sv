// tb_mdmc -- runs the MDMC with the PE, the crossbar and the seven polynomial
// memories and checks every compute command against reference arithmetic:
// NTT against a direct O(n^2) transform (bit-reversed output), iNTT back to
// the original polynomial, the six pointwise commands element by element,
// the rejection of a command with a port conflict, and the NTT cycle count
// log2(n) * (n/2 + 8) + 2.  Runs n = 16 and n = 32 (odd and even log2 n).
module tb_mdmc;
  import cofhee_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // DUT cluster
  bus_req_t m_req [6];
  bus_rsp_t m_rsp [6];
  slv_req_t s_req [NUM_SLV];
  logic [127:0] s_rdata [NUM_SLV];

  logic start, busy, done, err;
  cmd_t cmd;
  logic [3:0] logn;
  u128 ninv, cmod, q;
  logic [159:0] mu;
  logic [8:0] k;
  logic pe_valid, pe_raw, pe_ovalid;
  pe_mode_e pe_mode;
  u128 pe_a, pe_b, pe_w, pe_out0, pe_out1;
  logic [25:0] pe_tag, pe_otag;
  bus_req_t mreq5 [5];
  bus_rsp_t mrsp5 [5];
  bus_req_t hreq;
  assign m_req[5] = hreq;

  mdmc dut (.clk, .rst_n, .start, .cmd, .logn, .ninv, .cmod, .busy, .done, .err,
            .m_req(mreq5), .m_rsp(mrsp5), .pe_valid, .pe_mode, .pe_raw, .pe_a, .pe_b, .pe_w,
            .pe_tag, .pe_ovalid, .pe_out0, .pe_out1, .pe_otag);
  pe u_pe (.clk, .rst_n, .in_valid(pe_valid), .mode(pe_mode), .raw(pe_raw), .a(pe_a), .b(pe_b),
           .w(pe_w), .in_tag(pe_tag), .q, .mu, .k, .out_valid(pe_ovalid), .out0(pe_out0),
           .out1(pe_out1), .out_tag(pe_otag));
  for (genvar i = 0; i < 5; i++) begin : g_m
    assign m_req[i] = mreq5[i];
    assign mrsp5[i] = m_rsp[i];
  end
  bus_xbar #(.NM(6)) u_x (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rdata);
  for (genvar d = 0; d < 3; d++) begin : g_dp
    sram_dp #(.DEPTH(64)) u (.clk,
      .en_a(s_req[2*d].en), .we_a(s_req[2*d].we), .addr_a(s_req[2*d].addr[9:4]),
      .wdata_a(s_req[2*d].wdata), .wstrb_a(s_req[2*d].wstrb), .rdata_a(s_rdata[2*d]),
      .en_b(s_req[2*d+1].en), .we_b(s_req[2*d+1].we), .addr_b(s_req[2*d+1].addr[9:4]),
      .wdata_b(s_req[2*d+1].wdata), .wstrb_b(s_req[2*d+1].wstrb), .rdata_b(s_rdata[2*d+1]));
  end
  for (genvar i = 0; i < 4; i++) begin : g_sp
    sram_sp #(.DEPTH(64)) u (.clk, .en(s_req[6+i].en), .we(s_req[6+i].we),
      .addr(s_req[6+i].addr[9:4]), .wdata(s_req[6+i].wdata), .wstrb(s_req[6+i].wstrb),
      .rdata(s_rdata[6+i]));
  end
  assign s_rdata[10] = '0;
  assign s_rdata[11] = '0;

  // host port = master 5
  task automatic bus_wr(int mem, int idx, u128 v);
    @(negedge clk);
    hreq = '{valid: 1'b1, write: 1'b1, addr: word_addr(mem_region(memid_t'(mem), 1'b0), 13'(idx)),
                 wdata: v, wstrb: '1};
    while (!m_rsp[5].gnt) @(negedge clk);
    @(posedge clk); #1 hreq = '0;
  endtask
  task automatic bus_rd(int mem, int idx, output u128 v);
    @(negedge clk);
    hreq = '{valid: 1'b1, write: 1'b0, addr: word_addr(mem_region(memid_t'(mem), 1'b0), 13'(idx)),
                 wdata: '0, wstrb: '0};
    while (!m_rsp[5].gnt) @(negedge clk);
    @(posedge clk); #1 hreq = '0;
    v = m_rsp[5].rdata;
  endtask

  function automatic cmd_t mk(opcode_e op, int x, int y, int w, int t);
    logic [31:0] b;
    b = '0; b[3:0] = op; b[7:4] = 4'(x); b[11:8] = 4'(y); b[15:12] = 4'(w); b[19:16] = 4'(t);
    return cmd_t'(b);
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int last_cycles;

  task automatic run_cmd(cmd_t c, output logic e);
    int t0;
    @(negedge clk); cmd = c; start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    e = err; last_cycles = cyc - t0;
  endtask

  task automatic check(string what, u128 got, u128 exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  u128 x[64], y[64], X[64], om, psi, v;
  logic e;
  initial begin
    start = 0; cmd = '0; hreq = '0; q = TEST_Q; k = 9'd256; mu = barrett_mu(TEST_Q, 256);
    repeat (3) @(negedge clk); rst_n = 1;
    for (int L = 4; L <= 5; L++) begin
      int n; int res_mem;
      n = 1 << L; logn = 4'(L);
      psi = psi_for(L); om = mulmod(psi, psi, q);
      ninv = powmod(128'(n), q - 2, q);
      cmod = rand128() % q;
      // twiddles w[i] = om^i in SP0 (memory 3)
      v = 1;
      for (int i = 0; i < n / 2; i++) begin bus_wr(3, i, v); v = mulmod(v, om, q); end
      for (int i = 0; i < n; i++) begin
        x[i] = rand128() % q; y[i] = rand128() % q;
        bus_wr(0, i, x[i]);
      end
      // NTT: x in DP0, t in DP1
      run_cmd(mk(OP_NTT, 0, 0, 3, 1), e);
      checks++; if (e) failures++;
      checks++;
      if (last_cycles != L * (n / 2 + 8) + 2) begin
        failures++; $display("FAIL NTT cycles %0d", last_cycles);
      end
      for (int j = 0; j < n; j++) begin
        u128 s; s = 0;
        for (int i = 0; i < n; i++) s = addmod(s, mulmod(x[i], powmod(om, 128'((i * j) % n), q), q), q);
        X[j] = s;
      end
      res_mem = (L % 2) ? 1 : 0;
      for (int i = 0; i < n; i++) begin
        bus_rd(res_mem, i, v); check("ntt", v, X[bitrev(i, L)]);
      end
      // iNTT of that result: x = res_mem, t = the other
      run_cmd(mk(OP_INTT, res_mem, 0, 3, 1 - res_mem), e);
      checks++; if (e) failures++;
      for (int i = 0; i < n; i++) begin
        bus_rd((L % 2) ? res_mem : 1 - res_mem, i, v); check("intt", v, x[i]);
      end
      // pointwise: x in SP1 (4), y in SP2 (5), result to DP2 (2)
      for (int i = 0; i < n; i++) begin bus_wr(4, i, x[i]); bus_wr(5, i, y[i]); end
      for (int o = 0; o < 6; o++) begin
        opcode_e op;
        op = (o == 0) ? OP_PMODADD : (o == 1) ? OP_PMODSUB : (o == 2) ? OP_PMODMUL :
             (o == 3) ? OP_PMODSQR : (o == 4) ? OP_CMODMUL : OP_PMUL;
        run_cmd(mk(op, 4, 5, 0, 2), e);
        checks++; if (e) failures++;
        for (int i = 0; i < n; i++) begin
          u128 ex;
          case (o)
            0: ex = addmod(x[i], y[i], q);
            1: ex = submod(x[i], y[i], q);
            2: ex = mulmod(x[i], y[i], q);
            3: ex = mulmod(x[i], x[i], q);
            4: ex = mulmod(x[i], cmod, q);
            default: ex = x[i] * y[i];
          endcase
          bus_rd(2, i, v); check("pointwise", v, ex);
        end
      end
      // conflict: NTT with twiddles in the input memory is rejected
      run_cmd(mk(OP_NTT, 0, 0, 0, 1), e);
      checks++; if (!e) begin failures++; $display("FAIL conflict not flagged"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
