// tb_compute_logic: the computing logic with its scratchpads, the sparse
// feature buffer, a one-master system bus and four PMEM channels. Runs
// OP_LOOKUP, a deferred OP_LOOKUP of the next batch, OP_UPDATE and
// OP_CORRECT and checks, against an independent model: reduced embeddings
// (sum pooling), the updated table (e -= lr*g per occurrence), the match count
// of the relaxed correction and that the corrected reduced embedding equals a
// lookup done after the update; also which commands request a DCOH flush.
module tb_compute_logic;
  import trainingcxl_pkg::*;
  import tb_util_pkg::*;
  localparam int T = 4, L = 6, VL = 2;
  localparam logic [31:0] LR = 32'h0000_8000;   // 0.5
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_bank = 0, cmd_bank2 = 0, cmd_defer = 0, busy, done, flush_req;
  comp_op_e cmd_op = OP_LOOKUP;
  logic sf_bank, sf_wr_en = 0, sf_wr_bank = 0;
  logic [ENT_W-1:0] sf_entry, sf_wr_entry = '0;
  logic [IDX_W-1:0] sf_data, sf_wr_data = '0;
  logic mem_valid, mem_ready, mem_rsp_valid;
  mem_req_t mem_req;
  line_t mem_rsp_data;
  logic red_we, g_we = 0;
  logic [SPL_W-1:0] red_waddr, red_raddr, grad_raddr, g_waddr = '0;
  line_t red_wdata, red_rdata, grad_rdata, g_wdata = '0, unused_b0, unused_b1;
  logic [15:0] last_matches;
  logic [3:0] s_valid, s_ready, s_rsp_valid, med_re, med_we, raw;
  mem_req_t [3:0] s_req;
  logic [3:0][1:0] s_tag, s_rsp_tag;
  line_t [3:0] s_rsp_data, med_wdata, med_rdata;
  laddr_t [3:0] med_addr;
  logic conflict;

  compute_logic dut (.*, .vec_len(32'd32), .lr(LR), .num_tables(8'(T)), .num_lookups(8'(L)));
  sparse_feature_buf u_sf (.clk, .wr_en(sf_wr_en), .wr_bank(sf_wr_bank), .wr_entry(sf_wr_entry),
    .wr_data(sf_wr_data), .rda_bank(sf_bank), .rda_entry(sf_entry), .rda_data(sf_data),
    .rdb_bank(1'b0), .rdb_entry('0), .rdb_data());
  scratchpad u_red (.clk, .rst_n, .wr_en(red_we), .wr_addr(red_waddr), .wr_data(red_wdata),
    .rda_addr(red_raddr), .rda_data(red_rdata), .rdb_addr('0), .rdb_data(unused_b0));
  scratchpad u_grad (.clk, .rst_n, .wr_en(g_we), .wr_addr(g_waddr), .wr_data(g_wdata),
    .rda_addr(grad_raddr), .rda_data(grad_rdata), .rdb_addr('0), .rdb_data(unused_b1));
  system_bus #(.NM(1), .NS(4)) u_bus (.clk, .rst_n, .m_valid(mem_valid), .m_ready(mem_ready),
    .m_req(mem_req), .m_rsp_valid(mem_rsp_valid), .m_rsp_data(mem_rsp_data),
    .s_valid, .s_ready, .s_req, .s_tag, .s_rsp_valid, .s_rsp_data, .s_rsp_tag, .conflict);
  for (genvar i = 0; i < 4; i++) begin : g_s
    pmem_mc u_mc (.clk, .rst_n, .req_valid(s_valid[i]), .req_ready(s_ready[i]), .req(s_req[i]),
      .req_tag(s_tag[i]), .rsp_valid(s_rsp_valid[i]), .rsp_data(s_rsp_data[i]), .rsp_tag(s_rsp_tag[i]),
      .med_re(med_re[i]), .med_we(med_we[i]), .med_addr(med_addr[i]), .med_wdata(med_wdata[i]),
      .med_rdata(med_rdata[i]), .raw_hit(raw[i]));
    pmem_model u_pm (.clk, .re(med_re[i]), .we(med_we[i]), .addr(med_addr[i]),
      .wdata(med_wdata[i]), .rdata(med_rdata[i]));
  end
  function automatic line_t pm_peek(input laddr_t a);
    case (a % 4)
      0: return g_s[0].u_pm.peek(a);
      1: return g_s[1].u_pm.peek(a);
      2: return g_s[2].u_pm.peek(a);
      default: return g_s[3].u_pm.peek(a);
    endcase
  endfunction

  int checks = 0, failures = 0, flushes = 0;
  always @(posedge clk) if (flush_req) flushes++;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  line_t shadow [laddr_t];
  int idx [2][T][L];
  function automatic line_t sh(input laddr_t a);
    return shadow.exists(a) ? shadow[a] : init_line(a);
  endfunction
  function automatic line_t ref_lookup(input int b, input int t, input int l);
    line_t acc = '0;
    for (int j = 0; j < L; j++) acc = ref_add(acc, sh(ref_data_addr(t, idx[b][t][j], l)));
    return acc;
  endfunction
  task automatic run(input comp_op_e op, input bit b, input bit b2, input bit defer);
    @(negedge clk); cmd_valid = 1; cmd_op = op; cmd_bank = b; cmd_bank2 = b2; cmd_defer = defer;
    @(negedge clk); cmd_valid = 0;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask
  task automatic check_red(input int b, input string what);
    for (int t = 0; t < T; t++)
      for (int l = 0; l < VL; l++)
        check(u_red.mem[t * VL_MAX + l] == ref_lookup(b, t, l), what);
  endtask

  initial begin
    int m_exp;
    for (int b = 0; b < 2; b++)
      for (int t = 0; t < T; t++)
        for (int j = 0; j < L; j++) idx[b][t][j] = int'($urandom_range(0, 9)) * 1000 + 3;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 2; b++)
      for (int t = 0; t < T; t++)
        for (int j = 0; j < L; j++) begin
          @(negedge clk); sf_wr_en = 1; sf_wr_bank = b[0];
          sf_wr_entry = ENT_W'(t * MAX_LOOKUPS + j); sf_wr_data = 32'(idx[b][t][j]);
        end
    for (int t = 0; t < T; t++)
      for (int l = 0; l < VL; l++) begin
        @(negedge clk); sf_wr_en = 0; g_we = 1; g_waddr = SPL_W'(t * VL_MAX + l); g_wdata = grad_line(t * 2 + l);
      end
    @(negedge clk); g_we = 0; sf_wr_en = 0;

    run(OP_LOOKUP, 0, 0, 0);
    check_red(0, "lookup batch 0");
    check(flushes == 1, "lookup requests a flush");
    run(OP_LOOKUP, 1, 0, 1);
    check_red(1, "early lookup batch 1 (before update)");
    check(flushes == 1, "deferred lookup requests no flush");
    run(OP_UPDATE, 0, 0, 0);
    for (int t = 0; t < T; t++)
      for (int j = 0; j < L; j++)
        for (int l = 0; l < VL; l++) begin
          automatic laddr_t a = ref_data_addr(t, idx[0][t][j], l);
          shadow[a] = ref_sub(sh(a), grad_line(t * 2 + l), LR, 1);
        end
    foreach (shadow[a]) check(pm_peek(a) == shadow[a], "table after update");
    check(flushes == 1, "update requests no flush");
    run(OP_CORRECT, 1, 0, 0);
    check_red(1, "relaxed lookup equals lookup after update");
    check(flushes == 2, "correction requests a flush");
    m_exp = 0;
    for (int j = 0; j < L; j++)
      for (int k = 0; k < L; k++) if (idx[1][T-1][j] == idx[0][T-1][k]) m_exp++;
    check(int'(last_matches) == m_exp, "match count of the last table");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
