// system_bus: CXL-MEM frontend-to-backend interconnect.
//
// Connects NM frontend masters (computing logic, checkpointing logic, inbound
// CXL.mem) to NS memory controllers. Lines are interleaved over the
// controllers by the low address bits (slave = addr mod NS), so consecutive
// lines of a vector go to different PMEM channels. Every slave has its own
// round-robin arbiter, so masters that target different channels proceed in
// the same cycle. Each master keeps at most one request outstanding (it waits
// for the response before issuing the next), so the response of a slave can
// be routed back by its tag (the master number) without any reorder buffer
// and two slaves never answer the same master in one cycle (asserted). The
// paper only names the system bus; interleaving, arbitration and the
// one-outstanding rule are this design's choices.
//
// Handshake: m_valid/m_ready per master, request held until accepted;
// m_rsp_valid is a one-cycle pulse. conflict pulses when a master requests a
// slave that is granted to another master in that cycle.
module system_bus
  import trainingcxl_pkg::*;
#(
  parameter int NM    = 3,
  parameter int NS    = 4,
  parameter int TAG_W = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // masters
  input  logic     [NM-1:0]        m_valid,
  output logic     [NM-1:0]        m_ready,
  input  mem_req_t [NM-1:0]        m_req,
  output logic     [NM-1:0]        m_rsp_valid,
  output line_t    [NM-1:0]        m_rsp_data,
  // slaves (memory controllers)
  output logic     [NS-1:0]        s_valid,
  input  logic     [NS-1:0]        s_ready,
  output mem_req_t [NS-1:0]        s_req,
  output logic [NS-1:0][TAG_W-1:0] s_tag,
  input  logic     [NS-1:0]        s_rsp_valid,
  input  line_t    [NS-1:0]        s_rsp_data,
  input  logic [NS-1:0][TAG_W-1:0] s_rsp_tag,
  output logic                     conflict
);
  localparam int SW = (NS > 1) ? $clog2(NS) : 1;

  logic [NM-1:0][SW-1:0]    tgt;
  logic [NS-1:0][NM-1:0]    want;
  logic [NS-1:0][NM-1:0]    grant;
  logic [NS-1:0][TAG_W-1:0] rr;   // last granted master per slave

  always_comb begin
    for (int m = 0; m < NM; m++) tgt[m] = SW'(m_req[m].addr % LADDR_W'(NS));
    for (int s = 0; s < NS; s++)
      for (int m = 0; m < NM; m++)
        want[s][m] = m_valid[m] && (int'(tgt[m]) == s);
  end

  // round-robin: the first requesting master after the last granted one
  always_comb begin
    grant = '0;
    for (int s = 0; s < NS; s++) begin
      for (int k = 1; k <= NM; k++) begin
        automatic int m = (int'(rr[s]) + k) % NM;
        if (want[s][m] && grant[s] == '0) grant[s][m] = 1'b1;
      end
    end
  end

  always_comb begin
    m_ready  = '0;
    conflict = 1'b0;
    for (int s = 0; s < NS; s++) begin
      s_valid[s] = |grant[s];
      s_req[s]   = '0;
      s_tag[s]   = '0;
      for (int m = 0; m < NM; m++) begin
        if (grant[s][m]) begin
          s_req[s]   = m_req[m];
          s_tag[s]   = TAG_W'(m);
          m_ready[m] = s_ready[s];
        end
      end
      if (want[s] != grant[s]) conflict = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else
      for (int s = 0; s < NS; s++)
        for (int m = 0; m < NM; m++)
          if (grant[s][m] && s_ready[s]) rr[s] <= TAG_W'(m);
  end

  // response routing by tag
  always_comb begin
    m_rsp_valid = '0;
    m_rsp_data  = '0;
    for (int s = 0; s < NS; s++)
      if (s_rsp_valid[s] && int'(s_rsp_tag[s]) < NM) begin
        m_rsp_valid[s_rsp_tag[s]] = 1'b1;
        m_rsp_data[s_rsp_tag[s]]  = s_rsp_data[s];
      end
  end

  // a master never gets two responses in one cycle (one outstanding request)
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int s = 0; s < NS; s++)
        for (int s2 = s + 1; s2 < NS; s2++)
          assert (!(s_rsp_valid[s] && s_rsp_valid[s2] && s_rsp_tag[s] == s_rsp_tag[s2]))
            else $error("system_bus: two responses for master %0d", s_rsp_tag[s]);
    end
  end
endmodule
