// tb_system_bus: three masters issue random reads and writes, one outstanding
// each, through the bus to four memory controllers with media models. Checks
// every read against a reference memory (so routing by address interleave and
// response routing by tag are right), that each controller only sees addresses
// with its own interleave (addr mod 4), and that simultaneous requests to one
// controller produce conflicts and are all served (round-robin, no starvation).
module tb_system_bus;
  import trainingcxl_pkg::*;
  localparam int NM = 3, NS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic     [NM-1:0] m_valid = '0, m_ready, m_rsp_valid;
  mem_req_t [NM-1:0] m_req = '0;
  line_t    [NM-1:0] m_rsp_data;
  logic     [NS-1:0] s_valid, s_ready, s_rsp_valid, med_re, med_we, raw;
  mem_req_t [NS-1:0] s_req;
  logic [NS-1:0][1:0] s_tag, s_rsp_tag;
  line_t    [NS-1:0] s_rsp_data, med_wdata, med_rdata;
  laddr_t   [NS-1:0] med_addr;
  logic conflict;
  int checks = 0, failures = 0, nconf = 0;
  line_t refm [laddr_t];
  int done_cnt [NM];

  system_bus dut (.*);
  for (genvar i = 0; i < NS; i++) begin : g_s
    pmem_mc u_mc (.clk, .rst_n, .req_valid(s_valid[i]), .req_ready(s_ready[i]), .req(s_req[i]),
      .req_tag(s_tag[i]), .rsp_valid(s_rsp_valid[i]), .rsp_data(s_rsp_data[i]), .rsp_tag(s_rsp_tag[i]),
      .med_re(med_re[i]), .med_we(med_we[i]), .med_addr(med_addr[i]), .med_wdata(med_wdata[i]),
      .med_rdata(med_rdata[i]), .raw_hit(raw[i]));
    pmem_model u_pm (.clk, .re(med_re[i]), .we(med_we[i]), .addr(med_addr[i]),
      .wdata(med_wdata[i]), .rdata(med_rdata[i]));
    always @(posedge clk) if (s_valid[i] && s_ready[i]) begin
      checks++; if (int'(s_req[i].addr % NS) != i) failures++;
    end
  end
  always @(posedge clk) if (conflict) nconf++;

  function automatic line_t rm(input laddr_t a);
    return refm.exists(a) ? refm[a] : tb_util_pkg::init_line(a);
  endfunction

  task automatic master(input int m, input int n, input bit same);
    for (int k = 0; k < n; k++) begin
      // masters use disjoint address sets so the reference model is exact
      laddr_t a = same ? laddr_t'(4 * (k % 3) * NM + m * 4) : laddr_t'(($urandom_range(0, 63) * NM + m));
      bit we = $urandom_range(0, 1);
      line_t d = {16{$urandom}};
      @(negedge clk); m_valid[m] = 1; m_req[m] = '{we: we, addr: a, wdata: d};
      @(posedge clk); while (!m_ready[m]) @(posedge clk);
      @(negedge clk); m_valid[m] = 0;
      while (!m_rsp_valid[m]) @(posedge clk);
      if (we) refm[a] = d;
      else begin checks++; if (m_rsp_data[m] != rm(a)) failures++; end
      done_cnt[m]++;
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    fork master(0, 60, 0); master(1, 60, 0); master(2, 60, 0); join
    fork master(0, 20, 1); master(1, 20, 1); master(2, 20, 1); join
    for (int m = 0; m < NM; m++) begin checks++; if (done_cnt[m] != 80) failures++; end
    checks++; if (nconf == 0) begin failures++; $display("FAIL no conflict seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
