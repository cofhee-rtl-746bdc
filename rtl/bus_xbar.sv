// bus_xbar -- on-chip crossbar between the bus masters (MDMC streams, DMA,
// processor/host ports) and the slave ports (each dual-port memory as two
// slaves, the single-port memories, the Cortex-M0 memory, the registers).
//
// Every master request is decoded to a slave port by address
// (cofhee_pkg::addr_decode).  Each slave port grants, every cycle, the
// lowest-numbered master requesting it (fixed priority), so masters 0..4,
// the MDMC streams, are never held off by the DMA or the host.  Accesses to
// unmapped addresses are granted at once and read as zero.  A granted read
// returns its data, with rvalid, in the next cycle; a write completes when
// granted.  Different masters reaching different slaves proceed in the same
// cycle, so the MDMC can read two operands and a twiddle and write two
// results every cycle while the DMA copies between two other memories.
//
// The paper uses an AHB-Lite interconnect (a 10 x 11 crossbar, 32- to
// 128-bit transfers, single and burst).  This block keeps its topology and
// one-cycle memory data phase but uses a simpler request/grant handshake:
// there are no HTRANS/HBURST/HSIZE/HRESP signals and no wait-state
// extension of the data phase; a master that is not granted keeps its
// request up.
module bus_xbar
  import cofhee_pkg::*;
#(
  parameter int unsigned NM = 9,
  parameter int unsigned NS = NUM_SLV
) (
  input  logic        clk,
  input  logic        rst_n,
  input  bus_req_t    m_req  [NM],
  output bus_rsp_t    m_rsp  [NM],
  output slv_req_t    s_req  [NS],
  input  logic [BUS_DW-1:0] s_rdata [NS]
);
  logic [3:0]  dec   [NM];
  logic [NM-1:0] gnt;
  logic [NM-1:0] rd_pend;
  logic [3:0]  rd_slv [NM];

  always_comb begin
    for (int m = 0; m < NM; m++) dec[m] = addr_decode(m_req[m].addr);
    gnt = '0;
    for (int s = 0; s < NS; s++) begin
      s_req[s] = '0;
      for (int m = NM - 1; m >= 0; m--) begin
        if (m_req[m].valid && dec[m] == 4'(s)) begin
          s_req[s].en    = 1'b1;
          s_req[s].we    = m_req[m].write;
          s_req[s].addr  = m_req[m].addr;
          s_req[s].wdata = m_req[m].wdata;
          s_req[s].wstrb = m_req[m].wstrb;
        end
      end
    end
    for (int m = 0; m < NM; m++) begin
      if (m_req[m].valid) begin
        if (dec[m] >= 4'(NS)) gnt[m] = 1'b1;
        else begin
          gnt[m] = 1'b1;
          for (int h = 0; h < m; h++)
            if (m_req[h].valid && dec[h] == dec[m]) gnt[m] = 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pend <= '0;
      for (int m = 0; m < NM; m++) rd_slv[m] <= '0;
    end else begin
      for (int m = 0; m < NM; m++) begin
        rd_pend[m] <= gnt[m] && !m_req[m].write;
        rd_slv[m]  <= dec[m];
      end
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_rsp[m].gnt    = gnt[m];
      m_rsp[m].rvalid = rd_pend[m];
      m_rsp[m].rdata  = (rd_pend[m] && rd_slv[m] < 4'(NS)) ? s_rdata[rd_slv[m]] : '0;
    end
  end

  // At most one master reaches a slave per cycle.
  for (genvar s = 0; s < NS; s++) begin : g_chk
    logic [NM-1:0] hit;
    always_comb for (int m = 0; m < NM; m++) hit[m] = gnt[m] && dec[m] == 4'(s);
    assert property (@(posedge clk) disable iff (!rst_n) $onehot0(hit));
  end
endmodule
