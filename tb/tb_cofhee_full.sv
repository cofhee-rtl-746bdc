// tb_cofhee_full -- the end-to-end flow of tb_cofhee_top with the chip at its
// default size (8192-word memories, n = 2^13, 128-bit modulus) and no
// parameter overrides.  The second operand is the monomial b = c * x^3, so
// the negacyclic product is the first operand shifted by three places with
// the wrapped coefficients negated and scaled by c; this keeps the reference
// cheap at n = 8192.  Reports the NTT / iNTT / pointwise cycle counts next to
// the figures the paper reports for n = 2^13 and checks the NTT count
// against log2(n) * (n/2 + 8) + 2.  Every mechanism is counted as in the
// reduced test.
module tb_cofhee_full;
  import cofhee_pkg::*;
  import tb_util_pkg::*;
  localparam int  L    = 13;
  localparam int  N    = 1 << L;
  localparam bit  MONO = 1'b1;          // b = c * x^3 (shifted reference)
  localparam int  DIV  = 8;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t cm0_req;
  bus_rsp_t cm0_rsp;
  logic uartm_rx = 1, uartm_tx, uarts_tx, hostirq;
  logic [31:0] pad_ctl [8];
  logic [31:0] fhectl3, pllctl;

  cofhee_top dut (.*);

  // ------------------------------------------------------------ host bus
  task automatic bus(logic w, logic [31:0] a, u128 d, output u128 r);
    @(negedge clk);
    cm0_req = '{valid: 1'b1, write: w, addr: a, wdata: d, wstrb: '1};
    #1;
    while (!cm0_rsp.gnt) @(negedge clk);
    @(posedge clk); #1 cm0_req = '0;
    r = cm0_rsp.rdata;
  endtask
  task automatic mwr(int m, int i, u128 v);
    u128 r; bus(1'b1, word_addr(mem_region(memid_t'(m), 1'b0), 13'(i)), v, r);
  endtask
  task automatic mrd(int m, int i, output u128 v);
    bus(1'b0, word_addr(mem_region(memid_t'(m), 1'b0), 13'(i)), '0, v);
  endtask
  task automatic cwr(int slot, u128 v);
    u128 r; bus(1'b1, GPCFG_BASE | 32'(slot << 4), v, r);
  endtask
  task automatic crd(int slot, output u128 v);
    bus(1'b0, GPCFG_BASE | 32'(slot << 4), '0, v);
  endtask

  // ------------------------------------------------------------ serial
  task automatic put(logic [7:0] b);
    uartm_rx = 0; repeat (DIV) @(negedge clk);
    for (int i = 0; i < 8; i++) begin uartm_rx = b[i]; repeat (DIV) @(negedge clk); end
    uartm_rx = 1; repeat (DIV) @(negedge clk);
  endtask
  task automatic get(output logic [7:0] b);
    while (uartm_tx) @(negedge clk);
    repeat (DIV / 2) @(negedge clk);
    for (int i = 0; i < 8; i++) begin repeat (DIV) @(negedge clk); b[i] = uartm_tx; end
    repeat (DIV) @(negedge clk);
  endtask
  // UART-S listener (divider 4)
  logic [7:0] s_byte; int s_count = 0;
  initial begin
    forever begin
      @(negedge clk);
      if (rst_n && !uarts_tx) begin
        repeat (2) @(negedge clk);
        for (int i = 0; i < 8; i++) begin repeat (4) @(negedge clk); s_byte[i] = uarts_tx; end
        repeat (4) @(negedge clk);
        s_count++;
      end
    end
  end

  // ------------------------------------------------------------ monitors
  int cyc = 0, t_start = 0, conc = 0, irqs = 0;
  int cyc_by_op [16];
  logic irq_d = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.mdmc_start) t_start <= cyc;
    if (dut.mdmc_done) cyc_by_op[dut.mdmc_cmd.op] <= cyc - t_start;
    if (dut.mdmc_busy && dut.dma_busy) conc <= conc + 1;
    irq_d <= hostirq;
    if (hostirq && !irq_d) irqs <= irqs + 1;
  end

  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask
  function automatic logic [31:0] cw(opcode_e op, int x, int y, int w, int t,
                                     logic bar = 0, int len = 0);
    logic [31:0] b;
    b = '0; b[3:0] = op; b[7:4] = 4'(x); b[11:8] = 4'(y);
    if (len != 0) b[26:12] = 15'(len);
    else begin b[15:12] = 4'(w); b[19:16] = 4'(t); end
    b[31] = bar;
    return b;
  endfunction

  initial begin
    #(100000000); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // mechanism counters
  int n_uartm = 0, n_direct = 0, n_err = 0, n_queue = 0, n_ntt = 0, n_intt = 0,
      n_pw = 0, n_copy = 0, n_copyr = 0, n_prod = 0;

  u128 a [N], b [N], c [N], v, om, psi, psii, q;
  initial begin
    logic [7:0] by;
    logic [31:0] ad;
    int ok;
    cm0_req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);
    q = TEST_Q;
    // 1. host link
    cwr(8, DIV);
    ad = 32'h0000_0040; v = rand128();
    put(8'h57);
    for (int i = 0; i < 4; i++) put(ad[i*8 +: 8]);
    for (int i = 0; i < 16; i++) put(v[i*8 +: 8]);
    get(by); chk(by == 8'h4B, "UART-M ack");
    begin u128 r; bus(1'b0, ad, '0, r); chk(r == v, "UART-M write reached M0 SRAM"); if (r == v) n_uartm++; end
    ad = GPCFG_BASE | 32'(12 << 4);
    put(8'h52);
    for (int i = 0; i < 4; i++) put(ad[i*8 +: 8]);
    v = '0;
    for (int i = 0; i < 16; i++) begin get(by); v[i*8 +: 8] = by; end
    chk(v[31:0] == 32'hC0F4_EE01, "SIGNATURE over UART-M"); if (v[31:0] == 32'hC0F4_EE01) n_uartm++;
    // 2. configuration
    psi = psi_for(L); om = mulmod(psi, psi, q); psii = powmod(psi, q - 2, q);
    cwr(13, q); cwr(14, N); cwr(15, powmod(128'(N), q - 2, q)); cwr(16, 256);
    begin logic [159:0] mu; mu = barrett_mu(q, 256); cwr(17, mu[127:0]); cwr(18, 128'(mu[159:128])); end
    cwr(9, 4); cwr(11, 128'h5A01);
    // 3. data: SP0 twiddles, SP1 psi^i, DP2 psi^-i, SP3 a, SP2 b
    v = 1; for (int i = 0; i < N / 2; i++) begin mwr(3, i, v); v = mulmod(v, om, q); end
    v = 1; for (int i = 0; i < N; i++) begin mwr(4, i, v); v = mulmod(v, psi, q); end
    v = 1; for (int i = 0; i < N; i++) begin mwr(2, i, v); v = mulmod(v, psii, q); end
    for (int i = 0; i < N; i++) begin
      a[i] = rand128() % q;
      b[i] = MONO ? ((i == 3) ? rand128() % q : 128'd0) : rand128() % q;
      mwr(6, i, a[i]); mwr(5, i, b[i]);
    end
    // 4. direct mode: DP0 = a + b, then a conflicting NTT
    cwr(20, cw(OP_PMODADD, 6, 5, 0, 0));
    while (!hostirq) @(negedge clk);
    ok = 1;
    for (int i = 0; i < N; i++) begin mrd(0, i, v); if (v != addmod(a[i], b[i], q)) ok = 0; end
    chk(ok == 1, "direct PMODADD"); if (ok) n_direct++;
    cwr(25, 128'h30);
    cwr(20, cw(OP_NTT, 0, 0, 0, 1));
    while (!hostirq) @(negedge clk);
    crd(25, v); chk(v[5], "conflict flagged"); if (v[5]) n_err++;
    cwr(25, 128'h30);
    repeat (10) @(negedge clk);
    // 5. queue mode
    cwr(19, 1);
    cwr(23, cw(OP_PMODMUL, 6, 4, 0, 0));            // DP0 = a * psi^i
    cwr(23, cw(OP_MEMCPY, 2, 6, 0, 0, 1'b1, N));    // SP3 = psi^-i (after the above)
    cwr(23, cw(OP_NTT, 0, 0, 3, 1));                // DP1 = NTT(DP0)
    cwr(23, cw(OP_PMODMUL, 5, 4, 0, 2, 1'b1));      // DP2 = b * psi^i
    cwr(23, cw(OP_NTT, 2, 0, 3, 0));                // DP0 = NTT(DP2)
    cwr(23, cw(OP_PMODMUL, 1, 0, 0, 2));            // DP2 = DP1 * DP0
    cwr(23, cw(OP_INTT, 2, 0, 3, 0));               // DP2 = iNTT(DP2)
    cwr(23, cw(OP_PMODMUL, 2, 6, 0, 5));            // SP2 = DP2 * psi^-i
    cwr(23, cw(OP_MEMCPYR, 5, 1, 0, 0, 1'b1, N));   // DP1 = bitrev copy of SP2
    n_queue = 9;
    while (!hostirq) @(negedge clk);
    crd(25, v); chk(!v[5], "no error in queue run"); chk(v[2], "queue empty");
    // 6. checks
    for (int k2 = 0; k2 < N; k2++)
      c[k2] = (k2 >= 3) ? mulmod(a[k2 - 3], b[3], q) : submod(0, mulmod(a[k2 + N - 3], b[3], q), q);
    ok = 1;
    for (int i = 0; i < N; i++) begin
      mrd(5, i, v);
      if (v != c[i]) begin ok = 0; if (failures < 5) $display("FAIL prod[%0d] %h exp %h", i, v, c[i]); end
    end
    chk(ok == 1, "negacyclic product"); if (ok) begin n_prod++; n_ntt = 2; n_intt = 1; n_pw = 4; end
    ok = 1;
    for (int i = 0; i < N; i++) begin mrd(1, bitrev(i, L), v); if (v != c[i]) ok = 0; end
    chk(ok == 1, "MEMCPYR"); if (ok) n_copyr++;
    ok = 1;
    for (int i = 0; i < N; i++) begin mrd(6, i, v); if (v != powmod(psii, 128'(i), q)) ok = 0; end
    chk(ok == 1, "MEMCPY"); if (ok) n_copy++;
    crd(24, v);
    chk(cyc_by_op[OP_NTT] == L * (N / 2 + 8) + 2, $sformatf("NTT cycles %0d", cyc_by_op[OP_NTT]));
    $display("paper (Table 5, n=2^13): NTT 53535 iNTT 62770 cycles");
    $display("cycles: NTT %0d iNTT %0d PMODMUL %0d (DBG_REG %0d)",
             cyc_by_op[OP_NTT], cyc_by_op[OP_INTT], cyc_by_op[OP_PMODMUL], v[31:0]);
    repeat (200) @(negedge clk);
    chk(s_count >= 1 && s_byte == 8'h5A, $sformatf("UART-S byte %h count %0d", s_byte, s_count));
    // every mechanism must have happened
    chk(n_uartm == 2, "mechanism UART-M");
    chk(n_direct > 0, "mechanism direct command");
    chk(n_err > 0, "mechanism conflict error");
    chk(n_queue > 0 && n_prod > 0, "mechanism queued polynomial product");
    chk(n_ntt > 0 && n_intt > 0 && n_pw > 0, "mechanism NTT/iNTT/pointwise");
    chk(n_copy > 0 && n_copyr > 0, "mechanism DMA copies");
    chk(conc > 0, "mechanism copy concurrent with compute");
    chk(irqs >= 3, "mechanism interrupt");
    chk(s_count > 0, "mechanism UART-S report");
    $display("mechanisms: uartm=%0d direct=%0d err=%0d prod=%0d copy=%0d copyr=%0d conc=%0d irq=%0d uarts=%0d",
             n_uartm, n_direct, n_err, n_prod, n_copy, n_copyr, conc, irqs, s_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
