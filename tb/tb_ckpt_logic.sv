// tb_ckpt_logic: the checkpointing logic with the sparse feature buffer, a
// one-master system bus, four PMEM channels and a CXL-GPU model whose answer
// window opens and closes. Checks the embedding log (header, per-entry
// metadata and vector copies, counter, persistent flag), the MLP log fetched
// over CXL.cache across several GPU windows (contents, header, counter equal
// to the MMIO size, persistent flag), that an embedding log requested while
// the MLP log runs is served first, deletion of the old checkpoint once both
// flags are set, restoring a corrupted table from the log, and that a restore
// from an invalidated slot reports failure.
module tb_ckpt_logic;
  import trainingcxl_pkg::*;
  import tb_util_pkg::*;
  localparam int T = 3, L = 4, VL = 2, MLP_LINES = 20;
  localparam haddr_t MLP_BASE = 64'h0000_0008_0000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_bank = 0;
  ck_op_e cmd_op = CK_EMB;
  logic [31:0] batch_id = 0;
  logic sf_bank, sf_wr_en = 0, sf_wr_bank = 0;
  logic [ENT_W-1:0] sf_entry, sf_wr_entry = '0;
  logic [IDX_W-1:0] sf_data, sf_wr_data = '0;
  logic mem_valid, mem_ready, mem_rsp_valid;
  mem_req_t mem_req;
  line_t mem_rsp_data;
  logic cc_valid, cc_ready, cc_rsp_valid;
  haddr_t cc_addr;
  line_t cc_rsp_data;
  logic emb_busy, mlp_busy, restore_busy, emb_persist, mlp_persist, restore_ok;
  logic [31:0] emb_cnt, mlp_cnt, del_cnt;
  logic [3:0] s_valid, s_ready, s_rsp_valid, med_re, med_we, raw;
  mem_req_t [3:0] s_req;
  logic [3:0][1:0] s_tag, s_rsp_tag;
  line_t [3:0] s_rsp_data, med_wdata, med_rdata;
  laddr_t [3:0] med_addr;
  logic conflict, window = 0, d2h_valid, d2h_ready, h2d_valid;
  d2h_req_t d2h_req;
  h2d_rsp_t h2d_rsp;

  ckpt_logic dut (.*, .num_tables(8'(T)), .num_lookups(8'(L)), .vec_len(32'd32),
                  .mlp_addr(MLP_BASE), .mlp_size(32'(MLP_LINES * 64)));
  sparse_feature_buf u_sf (.clk, .wr_en(sf_wr_en), .wr_bank(sf_wr_bank), .wr_entry(sf_wr_entry),
    .wr_data(sf_wr_data), .rda_bank(1'b0), .rda_entry('0), .rda_data(),
    .rdb_bank(sf_bank), .rdb_entry(sf_entry), .rdb_data(sf_data));
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
  // the checkpoint DMA is the only CXL.cache source here (id 1)
  assign d2h_valid     = cc_valid;
  assign d2h_req       = '{op: D2H_RD, addr: cc_addr, wdata: '0, id: 1'b1};
  assign cc_ready      = d2h_ready;
  assign cc_rsp_valid  = h2d_valid && h2d_rsp.id;
  assign cc_rsp_data   = h2d_rsp.rdata;
  gpu_model u_gpu (.clk, .rst_n, .window, .d2h_valid, .d2h_ready, .d2h_req, .h2d_valid, .h2d_rsp);

  function automatic line_t pm_peek(input laddr_t a);
    case (a % 4)
      0: return g_s[0].u_pm.peek(a);
      1: return g_s[1].u_pm.peek(a);
      2: return g_s[2].u_pm.peek(a);
      default: return g_s[3].u_pm.peek(a);
    endcase
  endfunction
  task automatic pm_poke(input laddr_t a, input line_t d);
    case (a % 4)
      0: g_s[0].u_pm.mem[a] = d;
      1: g_s[1].u_pm.mem[a] = d;
      2: g_s[2].u_pm.mem[a] = d;
      default: g_s[3].u_pm.mem[a] = d;
    endcase
  endtask

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic cmd(input ck_op_e op, input bit b);
    @(negedge clk); cmd_valid = 1; cmd_op = op; cmd_bank = b;
    @(negedge clk); cmd_valid = 0;
  endtask
  // GPU alternates 150 cycles answering, 150 cycles busy elsewhere
  always begin
    repeat (150) @(negedge clk); window = ~window;
  end

  int idx [T][L];
  task automatic check_emb_log(input bit s, input int batch);
    line_t h = pm_peek(LOG_BASE + laddr_t'(s));
    check(h[31:0] == LOG_MAGIC && h[64] && h[63:32] == 32'(batch) && h[127:96] == T * L,
          "embedding-log header");
    for (int t = 0; t < T; t++)
      for (int j = 0; j < L; j++) begin
        automatic laddr_t base = EMB_AREA + laddr_t'(s) * laddr_t'(EMB_SLOT_LINES) +
                                 laddr_t'((t * L + j) * (VL_MAX + 1));
        check(pm_peek(base)[39:0] == {8'(t), 32'(idx[t][j])}, "entry metadata");
        for (int l = 0; l < VL; l++)
          check(pm_peek(base + laddr_t'(1 + l)) == init_line(ref_data_addr(t, idx[t][j], l)),
                "entry vector");
      end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < T; t++)
      for (int j = 0; j < L; j++) begin
        idx[t][j] = int'($urandom_range(0, 50));
        @(negedge clk); sf_wr_en = 1; sf_wr_bank = 1'b0;
        sf_wr_entry = ENT_W'(t * MAX_LOOKUPS + j); sf_wr_data = 32'(idx[t][j]);
      end
    @(negedge clk); sf_wr_en = 0;
    // embedding log of batch 6 (slot 0)
    batch_id = 6;
    cmd(CK_EMB, 0);
    while (emb_busy) @(negedge clk);
    check(emb_persist && emb_cnt == T * L, "embedding log persistent, counter");
    check_emb_log(0, 6);
    // MLP log; an embedding log of batch 7 is requested while it runs
    cmd(CK_MLP, 0);
    repeat (200) @(negedge clk);
    check(mlp_busy && mlp_cnt < MLP_LINES, "MLP log in progress");
    batch_id = 7;
    cmd(CK_EMB, 0);
    while (emb_busy) @(negedge clk);
    check(mlp_busy, "embedding log served while MLP log still running");
    check_emb_log(1, 7);
    while (mlp_busy) @(negedge clk);
    check(mlp_persist && mlp_cnt == MLP_LINES, "MLP log persistent, counter equals size");
    begin
      automatic line_t h = pm_peek(LOG_BASE + 2);   // first MLP log uses slot 0
      check(h[31:0] == LOG_MAGIC && h[64] && h[127:96] == MLP_LINES, "MLP-log header");
    end
    for (int k = 0; k < MLP_LINES; k++)
      check(pm_peek(MLP_AREA + laddr_t'(k)) == gpu_line(MLP_BASE + haddr_t'(k * 64)), "MLP-log line");
    check(u_gpu.rd_held > 0, "MLP reads waited for the GPU window");
    repeat (200) @(negedge clk);   // two header writes of the deletion
    check(del_cnt == 1, "old checkpoint deleted once");
    check(!pm_peek(LOG_BASE + 0)[64], "old embedding-log slot invalidated");
    check(pm_peek(LOG_BASE + 1)[64], "current embedding-log slot kept");
    // corrupt the table, then restore from slot 1
    for (int t = 0; t < T; t++)
      for (int j = 0; j < L; j++)
        for (int l = 0; l < VL; l++) pm_poke(ref_data_addr(t, idx[t][j], l), {16{32'hDEAD_DEAD}});
    cmd(CK_RESTORE, 1);
    while (restore_busy) @(negedge clk);
    check(restore_ok, "restore succeeded");
    for (int t = 0; t < T; t++)
      for (int j = 0; j < L; j++)
        for (int l = 0; l < VL; l++)
          check(pm_peek(ref_data_addr(t, idx[t][j], l)) == init_line(ref_data_addr(t, idx[t][j], l)),
                "restored vector");
    cmd(CK_RESTORE, 0);
    while (restore_busy) @(negedge clk);
    check(!restore_ok, "restore from a deleted slot fails");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
