// tb_bus_xbar -- drives four masters with random reads and writes to random
// slave ports (and unmapped addresses).  Slaves are modelled here: a read
// returns a word made of the slave index and address one cycle later, a
// write is logged.  Checks fixed-priority grants (lowest master wins, others
// wait), parallel grants to different slaves, routing of read data back to
// the right master, write fields at the slave, and unmapped accesses.
module tb_bus_xbar;
  import cofhee_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NM = 4;

  bus_req_t m_req [NM];
  bus_rsp_t m_rsp [NM];
  slv_req_t s_req [NUM_SLV];
  logic [BUS_DW-1:0] s_rdata [NUM_SLV];

  bus_xbar #(.NM(NM)) dut (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rdata);

  function automatic logic [127:0] tag(int s, logic [31:0] a);
    return {32'hA5A5_0000 | 32'(s), a, 64'h0123_4567_89ab_cdef};
  endfunction

  for (genvar s = 0; s < NUM_SLV; s++) begin : g_s
    always_ff @(posedge clk)
      if (s_req[s].en && !s_req[s].we) s_rdata[s] <= tag(s, s_req[s].addr);
  end

  function automatic logic [31:0] rand_addr();
    int s;
    s = $urandom_range(0, NUM_SLV);   // NUM_SLV = unmapped
    if (s == NUM_SLV) return 32'h6000_0000 | ($urandom & 32'hfff0);
    return slave_base(s) | ($urandom & 32'h0000_fff0);
  endfunction

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [NM-1:0] exp_rv;
  logic [127:0]  exp_rd [NM];
  int grants_contended = 0;

  initial begin
    for (int m = 0; m < NM; m++) m_req[m] = '0;
    exp_rv = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      logic [3:0] d [NM];
      logic [NM-1:0] eg;
      @(negedge clk);
      // read data from the previous cycle's grants
      for (int m = 0; m < NM; m++) begin
        checks++;
        if (m_rsp[m].rvalid !== exp_rv[m] || (exp_rv[m] && m_rsp[m].rdata !== exp_rd[m])) begin
          failures++;
          if (failures < 10) $display("FAIL rdata m%0d", m);
        end
      end
      // new random requests (few slaves so that masters collide)
      for (int m = 0; m < NM; m++) begin
        m_req[m].valid = $urandom_range(0, 3) != 0;
        m_req[m].write = $urandom_range(0, 1) == 1;
        m_req[m].addr  = (it % 2) ? rand_addr() : slave_base($urandom_range(0, 2)) | 32'(m << 4);
        m_req[m].wdata = {4{$urandom}};
        m_req[m].wstrb = 4'($urandom);
        d[m] = addr_decode(m_req[m].addr);
      end
      #1;
      for (int m = 0; m < NM; m++) begin
        eg[m] = m_req[m].valid;
        if (m_req[m].valid && d[m] < NUM_SLV)
          for (int h = 0; h < m; h++)
            if (m_req[h].valid && d[h] == d[m]) eg[m] = 1'b0;
        if (m_req[m].valid && !eg[m]) grants_contended++;
        checks++;
        if (m_rsp[m].gnt !== eg[m]) begin
          failures++;
          if (failures < 10) $display("FAIL gnt m%0d", m);
        end
        if (eg[m] && d[m] < NUM_SLV) begin
          checks++;
          if (!s_req[d[m]].en || s_req[d[m]].we !== m_req[m].write ||
              s_req[d[m]].addr !== m_req[m].addr ||
              (m_req[m].write && (s_req[d[m]].wdata !== m_req[m].wdata ||
                                  s_req[d[m]].wstrb !== m_req[m].wstrb))) begin
            failures++;
            if (failures < 10) $display("FAIL slave fields m%0d", m);
          end
        end
        exp_rv[m] = eg[m] && !m_req[m].write;
        exp_rd[m] = (d[m] < NUM_SLV) ? tag(int'(d[m]), m_req[m].addr) : '0;
      end
    end
    checks++;
    if (grants_contended == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
