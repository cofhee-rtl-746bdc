// gpcfg -- general purpose configuration registers, command FIFO and
// command dispatch.
//
// A bus slave at 0x4002_0000.  Each register sits in its own 16-byte slot
// (slot = addr[11:4]); 32-bit registers use bits [31:0] of the 128-bit bus,
// 128-bit registers the whole word, and the 160-bit Barrett constant two
// slots.  Reads return data the cycle after the access.
//
//  slot register         slot register          slot register
//   0  UARTMTX_PAD_CTL    9  UARTS_BAUD_CTL     18  BARRETTCTL2 [159:128]
//   1  UARTMRX_PAD_CTL   10  UARTM_CTL          19  FHECTL1  bit0: FIFO mode
//   2  UARTSTX_PAD_CTL   11  UARTS_CTL          20  FHECTL2  write: run command
//   3  SPIMOSI_PAD_CTL   12  SIGNATURE (ro)     21  FHECTL3  bit0: PLL clock
//   4  SPIMISO_PAD_CTL   13  Q                  22  PLLCTL
//   5  SPICLK_PAD_CTL    14  N                  23  COMMANDFIFO (write: push)
//   6  SPICSN_PAD_CTL    15  INV_POLYDEG        24  DBG_REG (ro): cycles of
//   7  HOSTIRQ_PAD_CTL   16  BARRETTCTL1 (k)         the last compute command
//   8  UARTM_BAUD_CTL    17  BARRETTCTL2 [127:0] 25  STATUS  26 CMODMUL_CONST
//
// STATUS (slot 25): [0] MDMC busy, [1] DMA busy, [2] queue empty, [3] queue
// full, [4] done interrupt, [5] error (command rejected or queue overflow),
// [14:8] queue count.  Writing 1 to bit 4 / bit 5 clears it.
//
// Execution modes: with FHECTL1[0] = 0 a write of a command word to FHECTL2
// starts it at once (if its unit is idle); with FHECTL1[0] = 1 commands are
// pushed into the 32-entry queue and issued in order.  MEMCPY/MEMCPYR go to
// the DMA, the rest to the MDMC.  A command is issued when its unit is idle;
// a command with the barrier bit waits until both units are idle.  So a copy
// can run beside a computation, while computations run one after another.
// The interrupt (host IRQ) rises when the queue is empty and both units are
// idle after at least one command was issued.
//
// n is taken from the N register (log2 of its highest set bit).
//
// From the paper: the register names and widths, the address range, the
// three ways of starting commands, the 32-entry queue and the interrupt on
// an empty queue.  Own choices: register offsets, the STATUS and
// CMODMUL_CONST registers, the meaning of DBG_REG, bit assignments inside
// FHECTL1/2/3 and the barrier bit.
module gpcfg
  import cofhee_pkg::*;
#(
  parameter logic [31:0] SIGNATURE = 32'hC0F4_EE01,
  parameter int unsigned QDEPTH    = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  // bus slave
  input  slv_req_t    s_req,
  output logic [BUS_DW-1:0] s_rdata,
  // configuration to the datapath
  output logic [COEF_W-1:0] q,
  output logic [3:0]        logn,
  output logic [COEF_W-1:0] ninv,
  output logic [MU_W-1:0]   mu,
  output logic [K_W-1:0]    k,
  output logic [COEF_W-1:0] cmod,
  // MDMC
  output logic        mdmc_start,
  output cmd_t        mdmc_cmd,
  input  logic        mdmc_busy,
  input  logic        mdmc_done,
  input  logic        mdmc_err,
  // DMA
  output logic        dma_start,
  output logic        dma_reverse,
  output memid_t      dma_src,
  output memid_t      dma_dst,
  output logic [14:0] dma_len,
  input  logic        dma_busy,
  // to pads, UARTs and PLL
  output logic [31:0] pad_ctl [8],
  output logic [31:0] uartm_baud,
  output logic [31:0] uarts_baud,
  output logic [31:0] uartm_ctl,
  output logic [31:0] uarts_ctl,
  output logic [31:0] fhectl3,
  output logic [31:0] pllctl,
  output logic        irq
);
  logic [7:0]  slot;
  logic        wr, rd;
  logic [COEF_W-1:0] n_reg;
  logic [31:0] fhectl1, fhectl2, dbg, cyc_cnt;
  logic        err_st;
  logic        ran;

  assign slot = s_req.addr[11:4];
  assign wr   = s_req.en && s_req.we;
  assign rd   = s_req.en && !s_req.we;

  function automatic logic [31:0] lane_merge32(logic [31:0] old, logic [BUS_DW-1:0] d,
                                               logic [BUS_NL-1:0] s);
    return s[0] ? d[31:0] : old;
  endfunction
  function automatic logic [COEF_W-1:0] lane_merge128(logic [COEF_W-1:0] old,
                                                      logic [BUS_DW-1:0] d,
                                                      logic [BUS_NL-1:0] s);
    logic [COEF_W-1:0] r;
    r = old;
    for (int l = 0; l < BUS_NL; l++) if (s[l]) r[l*32 +: 32] = d[l*32 +: 32];
    return r;
  endfunction

  // ---------------------------------------------------------- command queue
  logic        q_push, q_pop, q_empty, q_full, q_ovf;
  logic [31:0] q_head;
  logic [$clog2(QDEPTH+1)-1:0] q_count;

  assign q_push = wr && slot == 8'd23 && s_req.wstrb[0];

  cmd_fifo #(.DEPTH(QDEPTH), .W(32)) u_fifo (
    .clk, .rst_n, .push(q_push), .wdata(s_req.wdata[31:0]), .pop(q_pop),
    .rdata(q_head), .empty(q_empty), .full(q_full), .overflow(q_ovf), .count(q_count));

  // ---------------------------------------------------------------- dispatch
  cmd_t   head;
  logic   head_valid, direct_pend, unit_free, mem_cmd, issue;
  logic   mdmc_b, dma_b;

  assign mdmc_b     = mdmc_busy || mdmc_start;
  assign dma_b      = dma_busy || dma_start;
  assign head       = fhectl1[0] ? cmd_t'(q_head) : cmd_t'(fhectl2);
  assign head_valid = fhectl1[0] ? !q_empty : direct_pend;
  assign mem_cmd    = is_mem_op(head.op);
  assign unit_free  = head.barrier ? (!mdmc_b && !dma_b) : (mem_cmd ? !dma_b : !mdmc_b);
  assign issue      = head_valid && unit_free;
  assign q_pop      = issue && fhectl1[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mdmc_start <= 1'b0; mdmc_cmd <= '0; dma_start <= 1'b0; dma_reverse <= 1'b0;
      dma_src <= '0; dma_dst <= '0; dma_len <= '0; direct_pend <= 1'b0;
    end else begin
      mdmc_start <= 1'b0;
      dma_start  <= 1'b0;
      if (issue) begin
        if (mem_cmd) begin
          dma_start   <= 1'b1;
          dma_reverse <= (head.op == OP_MEMCPYR);
          dma_src     <= head.x;
          dma_dst     <= head.y;
          dma_len     <= head.len;
        end else begin
          mdmc_start <= 1'b1;
          mdmc_cmd   <= head;
        end
      end
      if (!fhectl1[0] && issue) direct_pend <= 1'b0;
      if (wr && slot == 8'd20 && s_req.wstrb[0]) direct_pend <= 1'b1;
    end
  end

  // --------------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 8; i++) pad_ctl[i] <= '0;
      uartm_baud <= 32'd1; uarts_baud <= 32'd1; uartm_ctl <= '0; uarts_ctl <= '0;
      q <= '0; n_reg <= '0; ninv <= '0; k <= '0; mu <= '0; cmod <= '0;
      fhectl1 <= '0; fhectl2 <= '0; fhectl3 <= '0; pllctl <= '0;
    end else if (wr) begin
      case (slot)
        8'd0, 8'd1, 8'd2, 8'd3, 8'd4, 8'd5, 8'd6, 8'd7:
               pad_ctl[slot[2:0]] <= lane_merge32(pad_ctl[slot[2:0]], s_req.wdata, s_req.wstrb);
        8'd8:  uartm_baud <= lane_merge32(uartm_baud, s_req.wdata, s_req.wstrb);
        8'd9:  uarts_baud <= lane_merge32(uarts_baud, s_req.wdata, s_req.wstrb);
        8'd10: uartm_ctl  <= lane_merge32(uartm_ctl, s_req.wdata, s_req.wstrb);
        8'd11: uarts_ctl  <= lane_merge32(uarts_ctl, s_req.wdata, s_req.wstrb);
        8'd13: q     <= lane_merge128(q, s_req.wdata, s_req.wstrb);
        8'd14: n_reg <= lane_merge128(n_reg, s_req.wdata, s_req.wstrb);
        8'd15: ninv  <= lane_merge128(ninv, s_req.wdata, s_req.wstrb);
        8'd16: k     <= K_W'(lane_merge32(32'(k), s_req.wdata, s_req.wstrb));
        8'd17: mu[127:0]   <= lane_merge128(mu[127:0], s_req.wdata, s_req.wstrb);
        8'd18: mu[159:128] <= lane_merge32(mu[159:128], s_req.wdata, s_req.wstrb);
        8'd19: fhectl1 <= lane_merge32(fhectl1, s_req.wdata, s_req.wstrb);
        8'd20: fhectl2 <= lane_merge32(fhectl2, s_req.wdata, s_req.wstrb);
        8'd21: fhectl3 <= lane_merge32(fhectl3, s_req.wdata, s_req.wstrb);
        8'd22: pllctl  <= lane_merge32(pllctl, s_req.wdata, s_req.wstrb);
        8'd26: cmod    <= lane_merge128(cmod, s_req.wdata, s_req.wstrb);
        default: ;
      endcase
    end
  end

  always_comb begin
    logn = '0;
    for (int b = 0; b <= int'(MAXLOGN) + 1; b++) if (n_reg[b]) logn = 4'(b);
  end

  // --------------------------------------------- status, interrupt, cycles
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irq <= 1'b0; err_st <= 1'b0; ran <= 1'b0; dbg <= '0; cyc_cnt <= '0;
    end else begin
      if (issue) ran <= 1'b1;
      if (ran && !issue && !head_valid && !mdmc_b && !dma_b) begin
        irq <= 1'b1; ran <= 1'b0;
      end
      if (mdmc_err || q_ovf) err_st <= 1'b1;
      if (wr && slot == 8'd25 && s_req.wstrb[0]) begin
        if (s_req.wdata[4]) irq    <= 1'b0;
        if (s_req.wdata[5]) err_st <= 1'b0;
      end
      if (mdmc_start) cyc_cnt <= 32'd1;
      else if (mdmc_b) cyc_cnt <= cyc_cnt + 1'b1;
      if (mdmc_done) dbg <= cyc_cnt;
    end
  end

  // -------------------------------------------------------------------- reads
  always_ff @(posedge clk) begin
    if (rd) begin
      s_rdata <= '0;
      case (slot)
        8'd0, 8'd1, 8'd2, 8'd3, 8'd4, 8'd5, 8'd6, 8'd7:
               s_rdata[31:0] <= pad_ctl[slot[2:0]];
        8'd8:  s_rdata[31:0] <= uartm_baud;
        8'd9:  s_rdata[31:0] <= uarts_baud;
        8'd10: s_rdata[31:0] <= uartm_ctl;
        8'd11: s_rdata[31:0] <= uarts_ctl;
        8'd12: s_rdata[31:0] <= SIGNATURE;
        8'd13: s_rdata <= q;
        8'd14: s_rdata <= n_reg;
        8'd15: s_rdata <= ninv;
        8'd16: s_rdata[31:0] <= 32'(k);
        8'd17: s_rdata <= mu[127:0];
        8'd18: s_rdata[31:0] <= mu[159:128];
        8'd19: s_rdata[31:0] <= fhectl1;
        8'd20: s_rdata[31:0] <= fhectl2;
        8'd21: s_rdata[31:0] <= fhectl3;
        8'd22: s_rdata[31:0] <= pllctl;
        8'd24: s_rdata[31:0] <= dbg;
        8'd25: s_rdata[31:0] <= {17'd0, 7'(q_count), 2'd0, err_st, irq, q_full, q_empty,
                                 dma_busy, mdmc_busy};
        8'd26: s_rdata <= cmod;
        default: ;
      endcase
    end
  end
endmodule
