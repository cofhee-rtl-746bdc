// dma -- memory-to-memory copy engine (MEMCPY and MEMCPYR commands).
//
// Copies len words from word 0 of memory src to memory dst over one bus
// master port.  MEMCPY writes word i to dst[i]; MEMCPYR writes it to
// dst[bitrev(i)] over log2(len) bits (len a power of two), which moves a
// polynomial between natural and bit-reversed order.  Each word is one read
// (data back the cycle after the grant) followed by one write, so a copy
// takes about 3 cycles per word when the bus is free; the DMA has lower
// priority than the MDMC and simply waits for grants, so it runs in the
// background of a computation on other memories.  A dual-port memory is
// accessed through its port A.
//
// Interface: start (1 cycle, with op/src/dst/len) -> busy -> done (1 cycle).
// From the paper: the two copy commands, their length/source/destination
// inputs and the concurrency with computation.  Own choices: the read-then-
// write sequencing, whole-memory offsets of zero and the port choice.
module dma
  import cofhee_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        reverse,
  input  memid_t      src,
  input  memid_t      dst,
  input  logic [14:0] len,
  output logic        busy,
  output logic        done,
  output bus_req_t    m_req,
  input  bus_rsp_t    m_rsp
);
  typedef enum logic [1:0] {D_IDLE, D_RD, D_WAIT, D_WR} state_e;
  state_e        st;
  logic          rev;
  memid_t        s_m, d_m;
  logic [14:0]   cnt, i;
  logic [3:0]    lg;
  logic [BUS_DW-1:0] buf_q;
  logic [MEM_AW-1:0] widx;

  // log2 of the length, for the bit reversal
  always_comb begin
    lg = '0;
    for (int b = 0; b < 15; b++) if (cnt[b]) lg = 4'(b);
  end
  assign widx = rev ? bit_rev(MAXLOGN'(i), lg) : MEM_AW'(i);

  always_comb begin
    m_req       = '0;
    m_req.wstrb = '1;
    if (st == D_RD) begin
      m_req.valid = 1'b1;
      m_req.addr  = word_addr(mem_region(s_m, 1'b0), MEM_AW'(i));
    end else if (st == D_WR) begin
      m_req.valid = 1'b1;
      m_req.write = 1'b1;
      m_req.addr  = word_addr(mem_region(d_m, 1'b0), widx);
      m_req.wdata = buf_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; rev <= 1'b0; s_m <= '0; d_m <= '0; cnt <= '0; i <= '0;
      buf_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        D_IDLE: if (start) begin
          rev <= reverse; s_m <= src; d_m <= dst; cnt <= len; i <= '0;
          if (len == '0) done <= 1'b1;
          else st <= D_RD;
        end
        D_RD:   if (m_rsp.gnt) st <= D_WAIT;
        D_WAIT: begin buf_q <= m_rsp.rdata; st <= D_WR; end
        D_WR:   if (m_rsp.gnt) begin
          i <= i + 1'b1;
          if (i + 1'b1 == cnt) begin st <= D_IDLE; done <= 1'b1; end
          else st <= D_RD;
        end
        default: st <= D_IDLE;
      endcase
    end
  end
  assign busy = (st != D_IDLE);
endmodule
