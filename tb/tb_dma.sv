// tb_dma -- runs the DMA through the crossbar on small memories: a straight
// copy (MEMCPY) and a bit-reversed copy (MEMCPYR) between single-port and
// dual-port memories, with a higher-priority master competing for the same
// memory during the copy.  Checks every destination word, that words beyond
// the length are untouched, and that the DMA was held off at least once.
module tb_dma;
  import cofhee_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t m_req [2];
  bus_rsp_t m_rsp [2];
  slv_req_t s_req [NUM_SLV];
  logic [127:0] s_rdata [NUM_SLV];
  bus_req_t hreq, dreq;
  assign m_req[0] = hreq;
  assign m_req[1] = dreq;

  logic start, reverse, busy, done;
  memid_t src, dst;
  logic [14:0] len;

  dma dut (.clk, .rst_n, .start, .reverse, .src, .dst, .len, .busy, .done,
           .m_req(dreq), .m_rsp(m_rsp[1]));
  bus_xbar #(.NM(2)) u_x (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rdata);

  sram_dp #(.DEPTH(64)) u_dp (.clk,
    .en_a(s_req[0].en), .we_a(s_req[0].we), .addr_a(s_req[0].addr[9:4]),
    .wdata_a(s_req[0].wdata), .wstrb_a(s_req[0].wstrb), .rdata_a(s_rdata[0]),
    .en_b(s_req[1].en), .we_b(s_req[1].we), .addr_b(s_req[1].addr[9:4]),
    .wdata_b(s_req[1].wdata), .wstrb_b(s_req[1].wstrb), .rdata_b(s_rdata[1]));
  for (genvar i = 0; i < 2; i++) begin : g_sp
    sram_sp #(.DEPTH(64)) u (.clk, .en(s_req[6+i].en), .we(s_req[6+i].we),
      .addr(s_req[6+i].addr[9:4]), .wdata(s_req[6+i].wdata), .wstrb(s_req[6+i].wstrb),
      .rdata(s_rdata[6+i]));
  end
  for (genvar s = 2; s < NUM_SLV; s++) begin : g_z
    if (s != 6 && s != 7) begin : g_zz
      assign s_rdata[s] = '0;
    end
  end

  int held = 0;
  always @(posedge clk) if (dreq.valid && !m_rsp[1].gnt) held++;

  task automatic bus_wr(int mem, int idx, u128 v);
    @(negedge clk);
    hreq = '{valid: 1'b1, write: 1'b1, addr: word_addr(mem_region(memid_t'(mem), 1'b0), 13'(idx)),
             wdata: v, wstrb: '1};
    @(posedge clk); #1 hreq = '0;
  endtask
  task automatic bus_rd(int mem, int idx, output u128 v);
    @(negedge clk);
    hreq = '{valid: 1'b1, write: 1'b0, addr: word_addr(mem_region(memid_t'(mem), 1'b0), 13'(idx)),
             wdata: '0, wstrb: '0};
    @(posedge clk); #1 hreq = '0;
    v = m_rsp[0].rdata;
  endtask

  task automatic copy(logic r, int s, int d, int l);
    @(negedge clk); start = 1; reverse = r; src = memid_t'(s); dst = memid_t'(d); len = 15'(l);
    @(negedge clk); start = 0;
    // compete for the source memory for a while
    for (int i = 0; i < 20; i++) begin
      u128 dummy;
      bus_rd(s, i, dummy);
    end
    while (!done) @(negedge clk);
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  u128 src_v [64], v;
  initial begin
    hreq = '0; start = 0; reverse = 0; src = '0; dst = '0; len = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      src_v[i] = rand128(); bus_wr(3, i, src_v[i]); bus_wr(4, i, 128'd0); bus_wr(0, i, 128'd0);
    end
    copy(1'b0, 3, 4, 40);              // SP0 -> SP1, 40 words
    for (int i = 0; i < 64; i++) begin
      bus_rd(4, i, v); checks++;
      if (v !== ((i < 40) ? src_v[i] : 128'd0)) failures++;
    end
    copy(1'b1, 3, 0, 32);              // SP0 -> DP0, bit-reversed, 32 words
    for (int i = 0; i < 32; i++) begin
      bus_rd(0, bitrev(i, 5), v); checks++;
      if (v !== src_v[i]) failures++;
    end
    bus_rd(0, 40, v); checks++; if (v !== 128'd0) failures++;
    checks++; if (held == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
