// tb_gpcfg -- exercises the configuration block on its own, with the MDMC
// and DMA replaced by busy/done models: register write/read-back (32-bit,
// 128-bit and the split 160-bit Barrett constant), SIGNATURE, log2 n from
// N, direct command trigger, the command queue (in-order issue, copies
// beside computations, the barrier bit, overflow, STATUS count), the
// completion interrupt and its clearing, error reporting and the cycle count
// in DBG_REG.
module tb_gpcfg;
  import cofhee_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  slv_req_t s_req;
  logic [127:0] s_rdata, q, ninv, cmod;
  logic [3:0] logn;
  logic [159:0] mu;
  logic [8:0] k;
  logic mdmc_start, mdmc_busy, mdmc_done, mdmc_err, dma_start, dma_reverse, dma_busy, irq;
  cmd_t mdmc_cmd;
  memid_t dma_src, dma_dst;
  logic [14:0] dma_len;
  logic [31:0] pad_ctl [8];
  logic [31:0] uartm_baud, uarts_baud, uartm_ctl, uarts_ctl, fhectl3, pllctl;

  gpcfg dut (.*);

  // unit models: MDMC busy for 20 cycles, DMA for 50
  int mdmc_left = 0, dma_left = 0;
  logic err_next = 0;
  cmd_t started[$];
  always_ff @(posedge clk) begin
    mdmc_done <= 1'b0; mdmc_err <= 1'b0;
    if (mdmc_start) begin mdmc_left <= 20; started.push_back(mdmc_cmd); end
    else if (mdmc_left > 0) begin
      mdmc_left <= mdmc_left - 1;
      if (mdmc_left == 1) begin mdmc_done <= 1'b1; mdmc_err <= err_next; end
    end
    if (dma_start) begin
      dma_left <= 50;
      started.push_back(cmd_t'({17'd0, dma_dst, dma_src, (dma_reverse ? OP_MEMCPYR : OP_MEMCPY)}));
    end else if (dma_left > 0) dma_left <= dma_left - 1;
  end
  assign mdmc_busy = mdmc_left > 0;
  assign dma_busy  = dma_left > 0;

  localparam logic [31:0] B = GPCFG_BASE;
  task automatic wr(int slot, logic [127:0] d, logic [3:0] s = 4'hf);
    @(negedge clk);
    s_req = '{en: 1'b1, we: 1'b1, addr: B | 32'(slot << 4), wdata: d, wstrb: s};
    @(negedge clk); s_req = '0;
  endtask
  task automatic rd(int slot, output logic [127:0] d);
    @(negedge clk);
    s_req = '{en: 1'b1, we: 1'b0, addr: B | 32'(slot << 4), wdata: '0, wstrb: '0};
    @(negedge clk); s_req = '0; d = s_rdata;
  endtask
  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask
  function automatic logic [31:0] cw(opcode_e op, int x, int y, int w, int t, logic bar = 0);
    logic [31:0] b;
    b = '0; b[3:0] = op; b[7:4] = 4'(x); b[11:8] = 4'(y); b[15:12] = 4'(w); b[19:16] = 4'(t);
    b[31] = bar;
    return b;
  endfunction

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [127:0] v, qq;
  int t0;
  initial begin
    s_req = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // registers
    qq = {$urandom, $urandom, $urandom, $urandom};
    wr(13, qq); rd(13, v); chk(v == qq && q == qq, "Q");
    wr(14, 128'd4096); chk(logn == 4'd12, "log2 n");
    wr(15, 128'h1234); chk(ninv == 128'h1234, "INV_POLYDEG");
    wr(16, 128'd256); chk(k == 9'd256, "BARRETTCTL1");
    wr(17, ~128'd0); wr(18, 128'h5); chk(mu == {32'h5, ~128'd0}, "BARRETTCTL2");
    rd(18, v); chk(v[31:0] == 32'h5, "BARRETTCTL2 high read");
    wr(3, 128'hABCD); chk(pad_ctl[3] == 32'hABCD, "pad ctl");
    wr(22, 128'h77); chk(pllctl == 32'h77, "PLLCTL");
    wr(26, 128'h99, 4'h1); chk(cmod == 128'h99, "CMODMUL const");
    wr(13, {32'hFFFF_FFFF, 96'd0}, 4'h8); chk(q[127:96] == 32'hFFFF_FFFF && q[95:0] == qq[95:0], "lane write");
    rd(12, v); chk(v[31:0] == 32'hC0F4_EE01, "SIGNATURE");
    // direct mode
    wr(20, cw(OP_NTT, 0, 0, 3, 1));
    repeat (2) @(negedge clk);
    chk(started.size() == 1 && started[0].op == OP_NTT, $sformatf("direct trigger %0d", started.size()));
    while (mdmc_busy) @(negedge clk);
    @(negedge clk);
    rd(25, v); chk(v[4] == 1'b1 && irq, "irq after direct command");
    rd(24, v); chk(v[31:0] == 32'd21, "DBG_REG cycle count");
    wr(25, 128'h10); chk(!irq, "irq cleared");
    // queue mode: compute, copy (runs beside it), compute, barrier copy
    started.delete();
    wr(19, 128'd1);
    wr(23, cw(OP_PMODADD, 3, 4, 0, 2));
    t0 = $time;
    wr(23, cw(OP_MEMCPY, 5, 6, 0, 0));
    wr(23, cw(OP_PMODMUL, 3, 4, 0, 2));
    wr(23, cw(OP_MEMCPYR, 2, 5, 0, 0, 1'b1));
    rd(25, v);
    @(negedge clk);
    chk(started.size() == 2 && started[0].op == OP_PMODADD && started[1].op == OP_MEMCPY,
        "copy issued beside computation");
    chk(mdmc_busy && dma_busy, "both units busy");
    while (started.size() < 3) @(negedge clk);
    chk(started[2].op == OP_PMODMUL, "second computation after the first");
    while (started.size() < 4) @(negedge clk);
    chk(!mdmc_busy, "barrier waited for MDMC");
    chk(started[3].op == OP_MEMCPYR, "order kept");
    while (!irq) @(negedge clk);
    chk(!mdmc_busy && !dma_busy, "irq only when all idle");
    wr(25, 128'h10);
    // error reporting
    err_next = 1;
    wr(23, cw(OP_NTT, 0, 0, 0, 1));
    while (!irq) @(negedge clk);
    rd(25, v); chk(v[5], "error flag");
    wr(25, 128'h30); rd(25, v); chk(!v[5] && !v[4], "W1C");
    err_next = 0;
    // overflow: stop dispatch by keeping a long command at the head
    wr(19, 128'd0);
    for (int i = 0; i < 33; i++) wr(23, cw(OP_PMODSUB, 3, 4, 0, 2));
    rd(25, v); chk(v[14:8] == 7'd32 && v[3] && v[5], "queue full and overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
