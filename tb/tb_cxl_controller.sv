// tb_cxl_controller: the CXL controller with a reduced-embedding scratchpad,
// a gradient scratchpad, one PMEM channel (pmem_mc + media model) as the
// system-bus slave and the CXL-GPU model on the CXL.cache channel. Checks the
// MMIO path (register readback, status bit packing including the DCOH busy
// bit, sparse-feature window writes), the DCOH flush of marked lines to GPU
// memory at red_base + 64*line while checkpoint reads compete for the same
// D2H channel (both served, responses routed by id, grants alternate), and
// the CXL.mem channel: gradient-window writes land in the gradient
// scratchpad and read back, other addresses are written to and read from
// PMEM through the bus.
module tb_cxl_controller;
  import trainingcxl_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mmio_wr = 0, mmio_rd = 0;
  logic [15:0] mmio_addr = '0;
  logic [31:0] mmio_wdata = '0, mmio_rdata;
  logic d2h_valid, d2h_ready, h2d_valid;
  d2h_req_t d2h_req;
  h2d_rsp_t h2d_rsp;
  logic m2s_valid = 0, m2s_ready, m2s_we = 0, s2m_valid;
  logic [LADDR_W:0] m2s_addr = '0;
  line_t m2s_wdata = '0, s2m_rdata;
  logic [31:0] vec_len, lr, mlp_size, batch_id, emb_cnt = 32'd77, mlp_cnt = 32'd99;
  haddr_t mlp_addr;
  logic [7:0] num_tables, num_lookups;
  logic comp_cmd_valid, comp_cmd_bank, comp_cmd_bank2, comp_cmd_defer;
  comp_op_e comp_cmd_op;
  logic ck_cmd_valid, ck_cmd_bank;
  ck_op_e ck_cmd_op;
  logic sf_wr_en, sf_wr_bank;
  logic [ENT_W-1:0] sf_wr_entry;
  logic [IDX_W-1:0] sf_wr_data;
  logic [6:0] dev_status = 7'b101_0110;
  logic red_mark_valid = 0, flush_start = 0;
  logic [SPL_W-1:0] red_mark_line = '0, red_rd_addr, grad_waddr, grad_raddr;
  line_t red_rd_data, grad_wdata, grad_rdata;
  logic dcoh_busy, grad_we;
  logic [31:0] dcoh_evicted;
  logic cc_valid = 0, cc_ready, cc_rsp_valid;
  haddr_t cc_addr = '0;
  line_t cc_rsp_data;
  logic bus_valid, bus_ready, bus_rsp_valid;
  mem_req_t bus_req;
  line_t bus_rsp_data;
  logic sp_we = 0;
  logic [SPL_W-1:0] sp_waddr = '0;
  line_t sp_wdata = '0;
  logic med_re, med_we;
  laddr_t med_addr;
  line_t med_wdata, med_rdata;

  cxl_controller dut (.*);
  scratchpad u_red (.clk, .rst_n, .wr_en(sp_we), .wr_addr(sp_waddr), .wr_data(sp_wdata),
    .rda_addr(red_rd_addr), .rda_data(red_rd_data), .rdb_addr('0), .rdb_data());
  scratchpad u_grad (.clk, .rst_n, .wr_en(grad_we), .wr_addr(grad_waddr), .wr_data(grad_wdata),
    .rda_addr(grad_raddr), .rda_data(grad_rdata), .rdb_addr('0), .rdb_data());
  pmem_mc u_mc (.clk, .rst_n, .req_valid(bus_valid), .req_ready(bus_ready), .req(bus_req),
    .req_tag(2'd2), .rsp_valid(bus_rsp_valid), .rsp_data(bus_rsp_data), .rsp_tag(),
    .med_re, .med_we, .med_addr, .med_wdata, .med_rdata, .raw_hit());
  pmem_model u_pm (.clk, .re(med_re), .we(med_we), .addr(med_addr), .wdata(med_wdata),
    .rdata(med_rdata));
  gpu_model u_gpu (.clk, .rst_n, .window(1'b1), .d2h_valid, .d2h_ready, .d2h_req, .h2d_valid, .h2d_rsp);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); mmio_wr = 1; mmio_addr = a; mmio_wdata = d; @(negedge clk); mmio_wr = 0;
  endtask
  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); mmio_rd = 1; mmio_addr = a; @(negedge clk); mmio_rd = 0; d = mmio_rdata;
  endtask
  task automatic mem(input bit we, input logic [LADDR_W:0] a, input line_t d, output line_t q);
    @(negedge clk); m2s_valid = 1; m2s_we = we; m2s_addr = a; m2s_wdata = d;
    while (!m2s_ready) @(negedge clk);
    @(negedge clk); m2s_valid = 0;
    while (!s2m_valid) @(negedge clk);
    q = s2m_rdata;
  endtask

  // sparse-feature window writes seen by the buffer
  int sf_seen = 0;
  always @(posedge clk) if (sf_wr_en) begin
    sf_seen++;
    check(sf_wr_bank == 1'b1 && sf_wr_entry == ENT_W'(5 + sf_seen) &&
          sf_wr_data == 32'(1000 + sf_seen), "sparse-feature window write");
  end
  // D2H grant order
  int n_wb = 0, n_rd = 0, alternations = 0;
  logic last_id = 0;
  always @(posedge clk) if (d2h_valid && d2h_ready) begin
    if (d2h_req.id) n_rd++; else n_wb++;
    if (d2h_req.id != last_id) alternations++;
    last_id = d2h_req.id;
  end

  localparam haddr_t RED = 64'h0000_0002_0000_1000;
  localparam int NMARK = 12;
  int cc_done = 0;
  logic [31:0] r;
  line_t q;

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // ---- MMIO ----
    wr(R_LR, 32'h0000_0CCD);   rd(R_LR, r);  check(r == 32'h0CCD && lr == 32'h0CCD, "LR");
    wr(R_NTABLES, 20);         rd(R_NTABLES, r); check(r == 20 && num_tables == 20, "NTABLES");
    rd(R_STATUS, r);
    check(r[7:0] == {dev_status[6:3], 1'b0, dev_status[2:0]}, "status packing, DCOH idle");
    rd(R_EMB_CNT, r); check(r == 77, "embedding-log counter readback");
    rd(R_MLP_CNT, r); check(r == 99, "MLP-log counter readback");
    wr(R_SF_BANK, 1);
    for (int i = 1; i <= 4; i++) wr(R_SF_WIN + 16'(4 * (5 + i)), 32'(1000 + i));
    check(sf_seen == 4, "four sparse-feature writes");
    // ---- DCOH flush while checkpoint reads compete ----
    wr(R_RED_LO, RED[31:0]); wr(R_RED_HI, RED[63:32]);
    for (int i = 0; i < NMARK; i++) begin
      @(negedge clk); sp_we = 1; sp_waddr = SPL_W'(3 * i); sp_wdata = grad_line(100 + i);
      red_mark_valid = 1; red_mark_line = SPL_W'(3 * i);
    end
    @(negedge clk); sp_we = 0; red_mark_valid = 0;
    @(negedge clk); flush_start = 1; @(negedge clk); flush_start = 0;
    rd(R_STATUS, r); check(r[3], "status shows DCOH busy");
    fork
      for (int i = 0; i < 8; i++) begin
        @(negedge clk); cc_valid = 1; cc_addr = 64'h0000_0008_0000_0000 + haddr_t'(i * 64); #1;
        while (!cc_ready) @(negedge clk);
        @(negedge clk); cc_valid = 0;
        while (!cc_rsp_valid) @(negedge clk);
        check(cc_rsp_data == gpu_line(cc_addr), "checkpoint read data routed by id");
        cc_done++;
      end
      while (dcoh_busy) @(negedge clk);
    join
    check(cc_done == 8 && n_rd == 8, $sformatf("all checkpoint reads served (%0d, %0d)", cc_done, n_rd));
    check(dcoh_evicted == NMARK && n_wb == NMARK, "all marked lines written back");
    check(alternations >= 4, "D2H grants alternate between the sources");
    for (int i = 0; i < NMARK; i++)
      check(u_gpu.wmem.exists(RED + haddr_t'(3 * i * 64)) &&
            u_gpu.wmem[RED + haddr_t'(3 * i * 64)] == grad_line(100 + i), "written-back line");
    // ---- CXL.mem ----
    for (int i = 0; i < 4; i++)
      mem(1'b1, {1'b1, LADDR_W'(10 + i)}, grad_line(200 + i), q);
    for (int i = 0; i < 4; i++) check(u_grad.mem[10 + i] == grad_line(200 + i), "gradient window write");
    for (int i = 0; i < 4; i++) begin
      mem(1'b0, {1'b1, LADDR_W'(10 + i)}, '0, q);
      check(q == grad_line(200 + i), "gradient window read");
    end
    mem(1'b1, {1'b0, LADDR_W'(12345)}, grad_line(300), q);
    check(u_pm.peek(12345) == grad_line(300), "CXL.mem write reaches PMEM");
    mem(1'b0, {1'b0, LADDR_W'(12345)}, '0, q);
    check(q == grad_line(300), "CXL.mem read from PMEM");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
