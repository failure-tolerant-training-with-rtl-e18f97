// tb_pmem_mc: one controller in front of a media model. Checks read latency
// BASE_LAT*3 = 12 cycles, write latency BASE_LAT*7 = 28 cycles (the paper's
// 3x / 7x PMEM-to-DRAM ratios with a 4-cycle DRAM base), the extra 28-cycle
// penalty of a read after a write to the same row (raw_hit), no penalty for a
// different row, data integrity, tag return and back-pressure (req_ready low
// while busy).
module tb_pmem_mc;
  import trainingcxl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, req_ready, rsp_valid, med_re, med_we, raw_hit;
  mem_req_t req = '0;
  logic [1:0] req_tag = '0, rsp_tag;
  line_t rsp_data, med_wdata, med_rdata;
  laddr_t med_addr;
  int checks = 0, failures = 0, nraw = 0;
  pmem_mc dut (.*);
  pmem_model u_pm (.clk, .re(med_re), .we(med_we), .addr(med_addr), .wdata(med_wdata), .rdata(med_rdata));
  always @(posedge clk) if (raw_hit) nraw++;

  task automatic access(input logic we, input laddr_t a, input line_t d, input logic [1:0] tag,
                        output line_t q, output int lat);
    int c = 0;
    @(negedge clk); req_valid = 1; req = '{we: we, addr: a, wdata: d}; req_tag = tag;
    @(posedge clk); while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
    c = 1;
    while (!rsp_valid) begin @(posedge clk); #1; if (!rsp_valid) c++; end
    lat = c + 1; q = rsp_data;   // edges from the accept edge to the edge that samples rsp_valid
    checks++; if (rsp_tag != tag) begin failures++; $display("FAIL tag"); end
  endtask

  initial begin
    line_t q, d;
    int lat;
    repeat (2) @(negedge clk); rst_n = 1;
    access(0, 30'h100, '0, 2'd1, q, lat);
    checks++; if (q != tb_util_pkg::init_line(30'h100)) failures++;
    checks++; if (lat != 12) begin failures++; $display("FAIL read latency %0d", lat); end
    d = {16{32'hCAFE_0001}};
    access(1, 30'h200, d, 2'd2, q, lat);
    checks++; if (lat != 28) begin failures++; $display("FAIL write latency %0d", lat); end
    access(0, 30'h201, '0, 2'd3, q, lat);    // same row (addr >> 4) right after the write
    checks++; if (lat != 12 + 28) begin failures++; $display("FAIL RAW latency %0d", lat); end
    access(0, 30'h200, '0, 2'd0, q, lat);
    checks++; if (q != d) failures++;
    access(0, 30'h300, '0, 2'd0, q, lat);    // other row: no penalty
    checks++; if (lat != 12) begin failures++; $display("FAIL other-row latency %0d", lat); end
    checks++; if (nraw != 2) begin failures++; $display("FAIL raw count %0d", nraw); end
    // back-pressure: not ready while a request is in service
    @(negedge clk); req_valid = 1; req = '{we: 0, addr: 30'h5, wdata: '0};
    @(posedge clk); @(negedge clk); req_valid = 0;
    checks++; if (req_ready) failures++;
    repeat (20) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
