// cofhee_top -- the CoFHEE co-processor: polynomial arithmetic for fully
// homomorphic encryption over 128-bit coefficients, n up to 8192 on chip.
//
// Blocks: the MDMC (controller and address generator) feeding one
// processing element (Barrett multiplier plus modular add/sub, a radix-2
// butterfly), three dual-port 8192 x 128 memories (operands and results of
// NTT stages), four single-port 8192 x 128 memories (polynomials, twiddles),
// a 64 KB memory for the Cortex-M0, a DMA copy engine, the configuration
// registers with the 32-entry command queue, a secondary UART that reports
// completion, and a crossbar joining them.  Bus masters: 0..4 MDMC streams,
// 5 DMA, 6 the Cortex-M0 / host port, 7 the primary UART host bridge.
//
// Parts not built here come out as ports: the Cortex-M0 is replaced by the
// cm0_req/cm0_rsp bus master port (a host model or the processor drives it);
// the all-digital PLL and the clock select are outside (clk is the core
// clock, fhectl3/pllctl carry their register values); pad controls go to the
// IO pads.  Memory map: data memories from 0x2000_0000 (128 KB per port, DP0
// A/B, DP1 A/B, DP2 A/B, SP0..SP3), Cortex-M0 memory at 0x0, registers at
// 0x4002_0000.
//
// Follows the paper's top-level block diagram; the memory count follows its
// text and area table (five single-port memories, one of them the M0's),
// where the diagram draws three single-port data memories.
module cofhee_top
  import cofhee_pkg::*;
#(
  parameter int unsigned DEPTH     = 8192,
  parameter int unsigned CM0_DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  // Cortex-M0 / host bus master port
  input  bus_req_t    cm0_req,
  output bus_rsp_t    cm0_rsp,
  // primary UART (host link)
  input  logic        uartm_rx,
  output logic        uartm_tx,
  // secondary UART (completion report) and host interrupt
  output logic        uarts_tx,
  output logic        hostirq,
  // register values for the pads and the PLL
  output logic [31:0] pad_ctl [8],
  output logic [31:0] fhectl3,
  output logic [31:0] pllctl
);
  localparam int unsigned NM = 8;
  localparam int unsigned AW = $clog2(DEPTH);

  bus_req_t m_req [NM];
  bus_rsp_t m_rsp [NM];
  slv_req_t s_req [NUM_SLV];
  logic [BUS_DW-1:0] s_rdata [NUM_SLV];

  // configuration
  logic [COEF_W-1:0] q, ninv, cmod;
  logic [MU_W-1:0]   mu;
  logic [K_W-1:0]    k;
  logic [3:0]        logn;
  logic [31:0]       uartm_baud, uarts_baud, uartm_ctl, uarts_ctl;
  logic              irq;

  // MDMC <-> gpcfg, PE
  logic mdmc_start, mdmc_busy, mdmc_done, mdmc_err;
  cmd_t mdmc_cmd;
  logic dma_start, dma_reverse, dma_busy, dma_done;
  memid_t dma_src, dma_dst;
  logic [14:0] dma_len;
  logic pe_valid, pe_raw, pe_ovalid;
  pe_mode_e pe_mode;
  logic [COEF_W-1:0] pe_a, pe_b, pe_w, pe_out0, pe_out1;
  logic [2*MEM_AW-1:0] pe_tag, pe_otag;
  bus_req_t mdmc_req [5];
  bus_rsp_t mdmc_rsp [5];

  gpcfg u_gpcfg (
    .clk, .rst_n, .s_req(s_req[S_CFG]), .s_rdata(s_rdata[S_CFG]),
    .q, .logn, .ninv, .mu, .k, .cmod,
    .mdmc_start, .mdmc_cmd, .mdmc_busy, .mdmc_done, .mdmc_err,
    .dma_start, .dma_reverse, .dma_src, .dma_dst, .dma_len, .dma_busy,
    .pad_ctl, .uartm_baud, .uarts_baud, .uartm_ctl, .uarts_ctl, .fhectl3, .pllctl, .irq);

  mdmc u_mdmc (
    .clk, .rst_n, .start(mdmc_start), .cmd(mdmc_cmd), .logn, .ninv, .cmod,
    .busy(mdmc_busy), .done(mdmc_done), .err(mdmc_err),
    .m_req(mdmc_req), .m_rsp(mdmc_rsp),
    .pe_valid, .pe_mode, .pe_raw, .pe_a, .pe_b, .pe_w, .pe_tag,
    .pe_ovalid, .pe_out0, .pe_out1, .pe_otag);

  pe u_pe (
    .clk, .rst_n, .in_valid(pe_valid), .mode(pe_mode), .raw(pe_raw),
    .a(pe_a), .b(pe_b), .w(pe_w), .in_tag(pe_tag), .q, .mu, .k,
    .out_valid(pe_ovalid), .out0(pe_out0), .out1(pe_out1), .out_tag(pe_otag));

  dma u_dma (
    .clk, .rst_n, .start(dma_start), .reverse(dma_reverse), .src(dma_src), .dst(dma_dst),
    .len(dma_len), .busy(dma_busy), .done(dma_done), .m_req(m_req[5]), .m_rsp(m_rsp[5]));

  uart_host u_uartm (
    .clk, .rst_n, .div(uartm_baud), .rx(uartm_rx), .tx(uartm_tx),
    .m_req(m_req[7]), .m_rsp(m_rsp[7]));

  for (genvar i = 0; i < 5; i++) begin : g_mdmc_bus
    assign m_req[i]    = mdmc_req[i];
    assign mdmc_rsp[i] = m_rsp[i];
  end
  assign m_req[6] = cm0_req;
  assign cm0_rsp  = m_rsp[6];

  bus_xbar #(.NM(NM)) u_xbar (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rdata);

  // polynomial memories
  for (genvar d = 0; d < NUM_DP; d++) begin : g_dp
    sram_dp #(.DEPTH(DEPTH)) u_mem (
      .clk,
      .en_a(s_req[2*d].en), .we_a(s_req[2*d].we), .addr_a(s_req[2*d].addr[AW+3:4]),
      .wdata_a(s_req[2*d].wdata), .wstrb_a(s_req[2*d].wstrb), .rdata_a(s_rdata[2*d]),
      .en_b(s_req[2*d+1].en), .we_b(s_req[2*d+1].we), .addr_b(s_req[2*d+1].addr[AW+3:4]),
      .wdata_b(s_req[2*d+1].wdata), .wstrb_b(s_req[2*d+1].wstrb), .rdata_b(s_rdata[2*d+1]));
  end
  for (genvar i = 0; i < NUM_SP; i++) begin : g_sp
    sram_sp #(.DEPTH(DEPTH)) u_mem (
      .clk, .en(s_req[S_SP0+i].en), .we(s_req[S_SP0+i].we),
      .addr(s_req[S_SP0+i].addr[AW+3:4]), .wdata(s_req[S_SP0+i].wdata),
      .wstrb(s_req[S_SP0+i].wstrb), .rdata(s_rdata[S_SP0+i]));
  end
  sram_sp #(.DEPTH(CM0_DEPTH)) u_cm0_mem (
    .clk, .en(s_req[S_CM0].en), .we(s_req[S_CM0].we),
    .addr(s_req[S_CM0].addr[$clog2(CM0_DEPTH)+3:4]), .wdata(s_req[S_CM0].wdata),
    .wstrb(s_req[S_CM0].wstrb), .rdata(s_rdata[S_CM0]));

  // completion report: one byte (UARTS_CTL[15:8]) on the secondary UART when
  // the interrupt rises and UARTS_CTL[0] is set
  logic irq_d, uarts_busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) irq_d <= 1'b0;
    else        irq_d <= irq;
  end
  uart_tx u_uarts (
    .clk, .rst_n, .div(uarts_baud), .send(irq && !irq_d && uarts_ctl[0]),
    .data(uarts_ctl[15:8]), .busy(uarts_busy), .tx(uarts_tx));

  assign hostirq = irq;
endmodule
