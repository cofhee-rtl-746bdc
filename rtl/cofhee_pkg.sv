// cofhee_pkg -- types, constants and small helper functions shared by the
// CoFHEE co-processor RTL.
//
// Holds the coefficient width (128 bits) and maximum on-chip polynomial
// degree (n = 2^13) of the chip, the command encoding used by the command
// FIFO and the direct-trigger register, the processing-element modes, the
// on-chip bus request/response structures and the memory map.
//
// Follows the paper: 128-bit coefficients, 8192-word memories, the command
// set (NTT, iNTT, PMODADD, PMODMUL, PMODSQR, PMODSUB, CMODMUL, PMUL, MEMCPY,
// MEMCPYR), the four PE modes, configuration registers at 0x4002_0000.
// Own choices: the numeric opcodes, the 32-bit command bit layout, the
// memory numbering and the addresses of the data memories.
package cofhee_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned COEF_W   = 128;            // coefficient width
  localparam int unsigned MAXLOGN  = 13;             // log2 of largest on-chip n
  localparam int unsigned MEM_AW   = MAXLOGN;        // word address of one polynomial memory
  localparam int unsigned MU_W     = 160;            // BARRETTCTL2 width
  localparam int unsigned K_W      = 9;              // Barrett shift amount width (k <= 511)
  localparam int unsigned BUS_DW   = 128;            // bus data width
  localparam int unsigned BUS_AW   = 32;             // bus byte address width
  localparam int unsigned BUS_NL   = BUS_DW / 32;    // 32-bit lanes on the bus

  // ------------------------------------------------------------- commands
  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_NTT     = 4'd1,
    OP_INTT    = 4'd2,
    OP_PMODADD = 4'd3,
    OP_PMODMUL = 4'd4,
    OP_PMODSQR = 4'd5,
    OP_PMODSUB = 4'd6,
    OP_CMODMUL = 4'd7,
    OP_PMUL    = 4'd8,
    OP_MEMCPY  = 4'd9,
    OP_MEMCPYR = 4'd10
  } opcode_e;

  // Memory numbering used inside commands: 0..2 dual-port, 3..6 single-port.
  localparam int unsigned NUM_DP  = 3;
  localparam int unsigned NUM_SP  = 4;
  localparam int unsigned NUM_MEM = NUM_DP + NUM_SP;
  typedef logic [3:0] memid_t;

  // 32-bit command word.  Compute commands use x/y/w/t; MEMCPY(R) use
  // x = source, y = destination and len = number of words (delta).
  typedef struct packed {
    logic        barrier;   // [31]    wait until every unit is idle before starting
    logic [3:0]  rsvd;      // [30:27]
    logic [14:0] len;       // [26:12] MEMCPY length in words (overlaps w/t)
    memid_t      y;         // [11:8]  second operand / copy destination
    memid_t      x;         // [7:4]   first operand / copy source
    opcode_e     op;        // [3:0]
  } cmd_t;

  function automatic memid_t cmd_w(cmd_t c);   // twiddle memory  [15:12]
    logic [31:0] b;
    b = c;
    return b[15:12];
  endfunction
  function automatic memid_t cmd_t_mem(cmd_t c); // temp / destination memory [19:16]
    logic [31:0] b;
    b = c;
    return b[19:16];
  endfunction
  function automatic logic is_mem_op(opcode_e op);
    return (op == OP_MEMCPY) || (op == OP_MEMCPYR);
  endfunction

  // ------------------------------------------------------------ PE modes
  typedef enum logic [1:0] {
    PE_MODMUL    = 2'd0,
    PE_MODADD    = 2'd1,
    PE_MODSUB    = 2'd2,
    PE_BUTTERFLY = 2'd3
  } pe_mode_e;

  // ------------------------------------------------------------------ bus
  // A master drives a request; it is accepted in the cycle gnt is high.
  // Read data returns in the cycle after acceptance with rvalid.
  typedef struct packed {
    logic              valid;
    logic              write;
    logic [BUS_AW-1:0] addr;
    logic [BUS_DW-1:0] wdata;
    logic [BUS_NL-1:0] wstrb;
  } bus_req_t;

  typedef struct packed {
    logic              gnt;
    logic              rvalid;
    logic [BUS_DW-1:0] rdata;
  } bus_rsp_t;

  // Request seen by a slave port (one access per cycle).
  typedef struct packed {
    logic              en;
    logic              we;
    logic [BUS_AW-1:0] addr;
    logic [BUS_DW-1:0] wdata;
    logic [BUS_NL-1:0] wstrb;
  } slv_req_t;

  // ----------------------------------------------------------- memory map
  // Slave ports.  Each dual-port memory appears twice, once per port.
  localparam int unsigned S_DP0A = 0, S_DP0B = 1, S_DP1A = 2, S_DP1B = 3,
                          S_DP2A = 4, S_DP2B = 5, S_SP0 = 6, S_SP1 = 7,
                          S_SP2 = 8, S_SP3 = 9, S_CM0 = 10, S_CFG = 11;
  localparam int unsigned NUM_SLV = 12;
  localparam logic [BUS_AW-1:0] DATA_BASE   = 32'h2000_0000;  // 128 KB per data slave port
  localparam logic [BUS_AW-1:0] CM0_BASE    = 32'h0000_0000;  // 64 KB
  localparam logic [BUS_AW-1:0] GPCFG_BASE  = 32'h4002_0000;  // 64 KB (from the paper)

  function automatic logic [BUS_AW-1:0] slave_base(int unsigned s);
    if (s < 10) return DATA_BASE + BUS_AW'(s) * 32'h0002_0000;
    if (s == S_CM0) return CM0_BASE;
    return GPCFG_BASE;
  endfunction

  // Address decode: returns the slave port index, NUM_SLV when unmapped.
  function automatic logic [3:0] addr_decode(logic [BUS_AW-1:0] a);
    if (a[31:24] == 8'h20 && a[23:17] < 7'd10) return 4'(a[23:17]);
    if (a[31:16] == 16'h0000) return 4'(S_CM0);
    if (a[31:16] == 16'h4002) return 4'(S_CFG);
    return 4'(NUM_SLV);
  endfunction

  // Slave port (region) through which memory m is reached on port p (0=A, 1=B).
  function automatic logic [3:0] mem_region(memid_t m, logic p);
    if (m < NUM_DP) return 4'(2 * m) + 4'(p);
    return 4'(S_SP0) + 4'(m - NUM_DP);
  endfunction

  function automatic logic is_dp(memid_t m);
    return m < NUM_DP;
  endfunction

  function automatic logic [BUS_AW-1:0] word_addr(logic [3:0] region, logic [MEM_AW-1:0] w);
    return slave_base(region) | {15'd0, w, 4'd0};
  endfunction

  // --------------------------------------------------- modular add / sub
  function automatic logic [COEF_W-1:0] mod_add(logic [COEF_W-1:0] a, logic [COEF_W-1:0] b,
                                               logic [COEF_W-1:0] q);
    logic [COEF_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[COEF_W-1:0];
  endfunction

  function automatic logic [COEF_W-1:0] mod_sub(logic [COEF_W-1:0] a, logic [COEF_W-1:0] b,
                                               logic [COEF_W-1:0] q);
    if (a >= b) return a - b;
    return a - b + q;
  endfunction

  // Bit reversal of the low `bits` bits of v (bits <= MAXLOGN).
  function automatic logic [MAXLOGN-1:0] bit_rev(logic [MAXLOGN-1:0] v, logic [3:0] bits);
    logic [MAXLOGN-1:0] r;
    r = '0;
    for (int i = 0; i < MAXLOGN; i++)
      if (i < int'(bits)) r[i] = v[int'(bits) - 1 - i];
    return r;
  endfunction

endpackage
