// mdmc -- Multiplier Data Mover and Controller: runs one compute command at
// a time by streaming operands from memory into the PE and results back.
//
// A command is split into passes over the polynomial:
//   NTT      log2(n) butterfly passes, Cooley-Tukey, natural-order input,
//            bit-reversed output.  Pass s pairs k and k+h, h = n/2^(s+1);
//            group g uses twiddle w[bitrev_{log2(n)-1}(g)].
//   iNTT     log2(n) butterfly passes, Cooley-Tukey, bit-reversed input,
//            natural-order output (pass s: h = 2^s, position r in a group
//            uses w[r * n/(2h)]), then one pass writing
//            x[j] = n^-1 * Y[(n - j) mod n]; the reversal turns the forward
//            transform into the inverse, so NTT and iNTT share one twiddle
//            table w[i] = omega^i, i < n/2.
//   PMODADD/PMODSUB/PMODMUL/PMODSQR/CMODMUL/PMUL   one pass of n elements.
// In every pass one operand set is issued per cycle (II = 1): for a
// butterfly both coefficients are read through the two ports of one
// dual-port memory and the twiddle from a third memory, and both results are
// written through the two ports of the other dual-port memory.  Butterfly
// passes ping-pong between x and t: pass 0 reads x and writes t.  After
// each pass the controller waits until the PE has drained (8 cycles),
// so the next pass reads finished data.  Hence an NTT leaves its result in t
// when log2(n) is odd and in x when even; an iNTT (log2(n)+1 passes) leaves
// it in x when log2(n) is odd.  Pointwise results go to t (the destination).
//
// Memory streams are bus masters 0..4 of the crossbar (read A, read B, read
// twiddle, write A, write B) and have priority over every other master, so
// they are never held off; a command whose streams would need the same
// memory port twice is rejected with err and does nothing.
//
// Timing: start (1 cycle, with cmd) -> busy from the next cycle -> done
// (1 cycle).  An NTT takes log2(n) * (n/2 + 8) + 2 cycles.
//
// From the paper: the command set, II = 1 butterflies from dual-port
// memories with twiddles from another memory, output/input memory swap after
// each stage, per-stage address increments with bit-reversal (its address
// generator figure), one shared twiddle table for NTT and iNTT, iNTT being
// NTT plus an n^-1 scaling pass.  Own choices: the exact address sequences
// and twiddle table layout, where results land, the drain between passes,
// port assignment and the rejection of conflicting commands.  Not built: the
// n = 2^14 mode with II = 2 through single-port memories.
module mdmc
  import cofhee_pkg::*;
#(
  parameter int unsigned AW = MEM_AW
) (
  input  logic           clk,
  input  logic           rst_n,
  // command
  input  logic           start,
  input  cmd_t           cmd,
  input  logic [3:0]     logn,
  input  logic [COEF_W-1:0] ninv,
  input  logic [COEF_W-1:0] cmod,
  output logic           busy,
  output logic           done,
  output logic           err,
  // bus streams: 0 read A, 1 read B, 2 read twiddle, 3 write A, 4 write B
  output bus_req_t       m_req [5],
  input  bus_rsp_t       m_rsp [5],
  // processing element
  output logic           pe_valid,
  output pe_mode_e       pe_mode,
  output logic           pe_raw,
  output logic [COEF_W-1:0] pe_a,
  output logic [COEF_W-1:0] pe_b,
  output logic [COEF_W-1:0] pe_w,
  output logic [2*AW-1:0] pe_tag,
  input  logic           pe_ovalid,
  input  logic [COEF_W-1:0] pe_out0,
  input  logic [COEF_W-1:0] pe_out1,
  input  logic [2*AW-1:0] pe_otag
);
  typedef enum logic [1:0] {S_IDLE, S_CHECK, S_RUN, S_DRAIN} state_e;
  typedef enum logic [1:0] {K_FWD, K_INV, K_SCALE, K_PW} kind_e;

  state_e   state;
  kind_e    kind;
  opcode_e  op;
  memid_t   xm, ym, wm, tm;
  logic [3:0]    pass;
  logic [AW-1:0] c;
  logic [3:0]    inflight;
  logic          in_is_x;
  logic          issued_d;

  // -------------------------------------------------- regions of streams
  memid_t in_m, out_m;
  logic [3:0] reg_s [5];
  logic [4:0] use_s;
  logic       conflict;

  assign in_m  = in_is_x ? xm : tm;
  assign out_m = in_is_x ? tm : xm;

  always_comb begin
    for (int i = 0; i < 5; i++) reg_s[i] = '0;
    use_s = '0;
    if (op == OP_NTT || op == OP_INTT) begin
      reg_s[0] = mem_region(in_m, 1'b0);
      reg_s[1] = mem_region(in_m, 1'b1);
      reg_s[2] = mem_region(wm, 1'b0);
      reg_s[3] = mem_region(out_m, 1'b0);
      reg_s[4] = mem_region(out_m, 1'b1);
      use_s    = (kind == K_SCALE) ? 5'b01001 : 5'b11111;
      if (state == S_CHECK) use_s = 5'b11111;
    end else begin
      reg_s[0] = mem_region(xm, 1'b0);
      reg_s[1] = mem_region(ym, 1'b1);
      reg_s[3] = mem_region(tm, (is_dp(tm) && tm == ym) ? 1'b0 : 1'b1);
      use_s    = (op == OP_PMODSQR || op == OP_CMODMUL) ? 5'b01001 : 5'b01011;
    end
    conflict = 1'b0;
    for (int i = 0; i < 5; i++)
      for (int j = i + 1; j < 5; j++)
        if (use_s[i] && use_s[j] && reg_s[i] == reg_s[j]) conflict = 1'b1;
    if (op == OP_NTT || op == OP_INTT)
      if (!is_dp(xm) || !is_dp(tm)) conflict = 1'b1;
    if (xm >= memid_t'(NUM_MEM) || ym >= memid_t'(NUM_MEM) ||
        wm >= memid_t'(NUM_MEM) || tm >= memid_t'(NUM_MEM)) conflict = 1'b1;
    if (logn == 4'd0 || logn > 4'(MAXLOGN)) conflict = 1'b1;
    if (op == OP_NOP || is_mem_op(op) || op > OP_MEMCPYR) conflict = 1'b1;
  end

  // ---------------------------------------------------- address sequences
  logic [AW-1:0] n_mask, hb_mask, ka, kb, ktw, last_c;
  logic [3:0]    hb;
  always_comb begin
    n_mask  = AW'((32'd1 << logn) - 1);
    hb      = (kind == K_FWD) ? 4'(logn - 4'd1 - pass) : pass;
    hb_mask = AW'((32'd1 << hb) - 1);
    ka = c; kb = c; ktw = '0;
    case (kind)
      K_FWD: begin
        ka  = ((c >> hb) << (hb + 1)) | (c & hb_mask);
        kb  = ka | AW'(32'd1 << hb);
        ktw = AW'(bit_rev(MAXLOGN'(c >> hb), logn - 4'd1));
      end
      K_INV: begin
        ka  = ((c >> hb) << (hb + 1)) | (c & hb_mask);
        kb  = ka | AW'(32'd1 << hb);
        ktw = (c & hb_mask) << (logn - 4'd1 - hb);
      end
      K_SCALE: ka = (AW'(0) - c) & n_mask;   // read address; write address is c
      default: ;
    endcase
    last_c = (kind == K_FWD || kind == K_INV) ? (n_mask >> 1) : n_mask;
  end

  logic issue;
  assign issue = (state == S_RUN);

  // ------------------------------------------------------------- requests
  always_comb begin
    for (int i = 0; i < 5; i++) begin
      m_req[i]       = '0;
      m_req[i].wstrb = '1;
    end
    if (issue) begin
      m_req[0].valid = 1'b1;
      m_req[0].addr  = word_addr(reg_s[0], ka);
      if (kind == K_FWD || kind == K_INV) begin
        m_req[1].valid = 1'b1;
        m_req[1].addr  = word_addr(reg_s[1], kb);
        m_req[2].valid = 1'b1;
        m_req[2].addr  = word_addr(reg_s[2], ktw);
      end else if (kind == K_PW && use_s[1]) begin
        m_req[1].valid = 1'b1;
        m_req[1].addr  = word_addr(reg_s[1], c);
      end
    end
    if (pe_ovalid) begin
      m_req[3].valid = 1'b1;
      m_req[3].write = 1'b1;
      m_req[3].addr  = word_addr(reg_s[3], pe_otag[2*AW-1:AW]);
      m_req[3].wdata = pe_out0;
      if (kind == K_FWD || kind == K_INV) begin
        m_req[4].valid = 1'b1;
        m_req[4].write = 1'b1;
        m_req[4].addr  = word_addr(reg_s[4], pe_otag[AW-1:0]);
        m_req[4].wdata = pe_out1;
      end
    end
  end

  // ------------------------------------------------------- PE operands
  logic [2*AW-1:0] tag_d;
  always_comb begin
    pe_valid = issued_d;
    pe_a     = m_rsp[0].rdata;
    pe_b     = m_rsp[1].rdata;
    pe_w     = m_rsp[2].rdata;
    pe_tag   = tag_d;
    pe_raw   = 1'b0;
    pe_mode  = PE_BUTTERFLY;
    case (kind)
      K_SCALE: begin pe_mode = PE_MODMUL; pe_b = ninv; end
      K_PW: begin
        case (op)
          OP_PMODADD: pe_mode = PE_MODADD;
          OP_PMODSUB: pe_mode = PE_MODSUB;
          OP_PMODSQR: begin pe_mode = PE_MODMUL; pe_b = m_rsp[0].rdata; end
          OP_CMODMUL: begin pe_mode = PE_MODMUL; pe_b = cmod; end
          OP_PMUL:    begin pe_mode = PE_MODMUL; pe_raw = 1'b1; end
          default:    pe_mode = PE_MODMUL;
        endcase
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------ control
  logic last_pass;
  assign last_pass = (kind == K_PW) || (kind == K_SCALE) ||
                     (kind == K_FWD && pass == logn - 4'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; kind <= K_PW; op <= OP_NOP;
      xm <= '0; ym <= '0; wm <= '0; tm <= '0;
      pass <= '0; c <= '0; inflight <= '0; in_is_x <= 1'b1;
      issued_d <= 1'b0; tag_d <= '0; done <= 1'b0; err <= 1'b0;
    end else begin
      done     <= 1'b0;
      err      <= 1'b0;
      issued_d <= issue;
      tag_d    <= (kind == K_SCALE) ? {c, c} : {ka, kb};
      inflight <= inflight + 4'(issue) - 4'(pe_ovalid);
      case (state)
        S_IDLE: if (start) begin
          op <= cmd.op; xm <= cmd.x; ym <= cmd.y; wm <= cmd_w(cmd); tm <= cmd_t_mem(cmd);
          kind <= (cmd.op == OP_NTT) ? K_FWD : (cmd.op == OP_INTT) ? K_INV : K_PW;
          pass <= '0; c <= '0; in_is_x <= 1'b1;
          state <= S_CHECK;
        end
        S_CHECK: begin
          if (conflict) begin
            state <= S_IDLE; done <= 1'b1; err <= 1'b1;
          end else state <= S_RUN;
        end
        S_RUN: begin
          c <= c + 1'b1;
          if (c == last_c) state <= S_DRAIN;
        end
        S_DRAIN: if (inflight == 4'd0) begin
          c <= '0;
          if (last_pass) begin
            state <= S_IDLE; done <= 1'b1;
          end else begin
            in_is_x <= ~in_is_x;
            if (kind == K_INV && pass == logn - 4'd1) kind <= K_SCALE;
            else pass <= pass + 1'b1;
            state <= S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // The MDMC streams have top priority and distinct ports: never held off.
  for (genvar i = 0; i < 5; i++) begin : g_gnt
    assert property (@(posedge clk) disable iff (!rst_n) m_req[i].valid |-> m_rsp[i].gnt);
  end
endmodule
