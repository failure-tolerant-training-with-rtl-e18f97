// tb_cxl_mem_top: end-to-end test of the CXL-MEM device at its default
// parameters. Host software is played through MMIO and CXL.mem, CXL-GPU by
// gpu_model, the four PMEM channels by pmem_model. NB training batches run in
// the relaxed schedule: embedding log of batch N (undo log), early lookup of
// batch N+1 on batch N's table, MLP log while the GPU "window" is open,
// gradient delivery into the gradient window, embedding update of batch N,
// relaxed correction and DCOH eviction of batch N+1's reduced embeddings.
// Checks against an independent shadow model: every reduced embedding the
// GPU receives equals a plain lookup on the up-to-date table, the PMEM table,
// the embedding-log contents and headers, the MLP log contents, old-checkpoint
// deletion, and a restore after a simulated failure in the middle of training.
// Each mechanism (RAW stall, bus conflict, MLP log held by the GPU window and
// spanning batches, relaxed correction with shared indices, DCOH eviction,
// checkpoint deletion, restore) is counted and must occur at least once.
module tb_cxl_mem_top;
  import trainingcxl_pkg::*;
  import tb_util_pkg::*;

  localparam int NB = 4;            // batches
  localparam int T  = 3;            // tables
  localparam int L  = 5;            // lookups per table
  localparam int VL = 2;            // vec_len 32 -> 2 lines
  localparam int MLP_LINES = 24;
  localparam logic [31:0] LR = 32'h0000_4000;   // 0.25
  localparam haddr_t MLP_BASE = 64'h1_0000_0000;
  localparam haddr_t RED_BASE = 64'h0_2000_0000;

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
  logic   [3:0] med_re, med_we, raw_hit;
  laddr_t [3:0] med_addr;
  line_t  [3:0] med_wdata, med_rdata;
  logic bus_conflict, comp_done, dcoh_busy;
  logic [15:0] last_matches;
  logic [31:0] del_cnt, dcoh_evicted;
  logic window = 0;

  cxl_mem_top dut (.*);

  gpu_model u_gpu (.clk, .rst_n, .window, .d2h_valid, .d2h_ready, .d2h_req, .h2d_valid, .h2d_rsp);

  for (genvar i = 0; i < 4; i++) begin : g_pm
    pmem_model u_pm (.clk, .re(med_re[i]), .we(med_we[i]), .addr(med_addr[i]),
                     .wdata(med_wdata[i]), .rdata(med_rdata[i]));
  end

  function automatic line_t pm_peek(input laddr_t a);
    case (a % 4)
      0: return g_pm[0].u_pm.peek(a);
      1: return g_pm[1].u_pm.peek(a);
      2: return g_pm[2].u_pm.peek(a);
      default: return g_pm[3].u_pm.peek(a);
    endcase
  endfunction

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int n_raw = 0, n_conflict = 0, n_match = 0, n_span = 0;
  always @(posedge clk) if (rst_n) begin
    n_raw      <= n_raw + $countones(raw_hit);
    n_conflict <= n_conflict + int'(bus_conflict);
    if (comp_done && last_matches != 0) n_match <= n_match + 1;
  end

  // ---------------- host-side tasks ---------------------------------------
  task automatic mmio_write(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); mmio_wr = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk); mmio_wr = 0;
  endtask
  task automatic mmio_read(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); mmio_rd = 1; mmio_addr = a;
    @(negedge clk); mmio_rd = 0; d = mmio_rdata;
  endtask
  task automatic wait_idle(input logic [7:0] mask);
    logic [31:0] s;
    repeat (4) @(negedge clk);
    do mmio_read(R_STATUS, s); while ((s[7:0] & mask) != 0);
  endtask
  task automatic cxlmem_write(input logic [LADDR_W:0] a, input line_t d);
    @(negedge clk); m2s_valid = 1; m2s_we = 1; m2s_addr = a; m2s_wdata = d;
    do @(posedge clk); while (!m2s_ready);
    @(negedge clk); m2s_valid = 0;
    do @(posedge clk); while (!s2m_valid);
  endtask
  task automatic cxlmem_read(input logic [LADDR_W:0] a, output line_t d);
    @(negedge clk); m2s_valid = 1; m2s_we = 0; m2s_addr = a;
    do @(posedge clk); while (!m2s_ready);
    @(negedge clk); m2s_valid = 0;
    do @(posedge clk); while (!s2m_valid);
    d = s2m_rdata;
  endtask

  // ---------------- shadow model ------------------------------------------
  line_t shadow [laddr_t];
  int    idx [NB+1][T][L];
  function automatic line_t sh(input laddr_t a);
    return shadow.exists(a) ? shadow[a] : init_line(a);
  endfunction
  function automatic line_t ref_lookup(input int b, input int t, input int l);
    line_t acc = '0;
    for (int j = 0; j < L; j++) acc = ref_add(acc, sh(ref_data_addr(t, idx[b][t][j], l)));
    return acc;
  endfunction

  task automatic load_indices(input int b, input bit bank);
    mmio_write(R_SF_BANK, {31'b0, bank});
    for (int t = 0; t < T; t++)
      for (int j = 0; j < L; j++)
        mmio_write(R_SF_WIN + 16'(4 * (t * MAX_LOOKUPS + j)), 32'(idx[b][t][j]));
  endtask

  task automatic check_gpu_reduced(input int b, input string tag);
    for (int t = 0; t < T; t++)
      for (int l = 0; l < VL; l++) begin
        haddr_t ga = RED_BASE + haddr_t'((t * VL_MAX + l) * 64);
        check(u_gpu.wmem.exists(ga) && u_gpu.wmem[ga] == ref_lookup(b, t, l),
              $sformatf("%s: reduced embedding batch %0d table %0d line %0d", tag, b, t, l));
      end
  endtask

  task automatic run_window(input int cycles);
    @(negedge clk); window = 1;
    repeat (cycles) @(negedge clk);
    window = 0;
  endtask

  // ---------------- test ----------------------------------------------------
  line_t pre [laddr_t];
  logic [31:0] s, ev0;
  int mlp_started = 0;

  initial begin
    for (int b = 0; b <= NB; b++)
      for (int t = 0; t < T; t++)
        for (int j = 0; j < L; j++) idx[b][t][j] = int'($urandom_range(0, 7));
    repeat (3) @(negedge clk);
    rst_n = 1;
    mmio_write(R_VEC_LEN, 32);
    mmio_write(R_LR, LR);
    mmio_write(R_NTABLES, T);
    mmio_write(R_NLOOKUPS, L);
    mmio_write(R_MLP_LO, MLP_BASE[31:0]);
    mmio_write(R_MLP_HI, MLP_BASE[63:32]);
    mmio_write(R_MLP_SIZE, MLP_LINES * 64);
    mmio_write(R_RED_LO, RED_BASE[31:0]);
    mmio_write(R_RED_HI, RED_BASE[63:32]);
    mmio_read(R_LR, s);
    check(s == LR, "MMIO read-back of learning rate");

    // batch 0: embedding log and plain lookup run together
    load_indices(0, 1'b0);
    mmio_write(R_BATCH, 0);
    mmio_write(R_CK_CMD, {27'b0, 1'b0, 2'b0, CK_EMB});
    mmio_write(R_COMP_CMD, {29'b0, 1'b0, OP_LOOKUP});
    wait_idle(8'h0B);
    check_gpu_reduced(0, "plain lookup");

    for (int n = 0; n < NB; n++) begin
      automatic bit b  = n[0];
      automatic bit nb = ~b;
      if (n > 0) begin
        mmio_write(R_BATCH, n);
        if ((s[2]) && mlp_started > 0) n_span++;   // MLP log still running at batch start
        mmio_write(R_CK_CMD, {27'b0, b, 2'b0, CK_EMB});
      end
      // next batch's indices, early (relaxed) lookup on this batch's table
      load_indices(n + 1, nb);
      wait_idle(8'h02);                                   // embedding log persistent
      mmio_read(R_STATUS, s);
      check(s[4] == 1'b1, $sformatf("embedding log persistent flag, batch %0d", n));
      mmio_read(R_EMB_CNT, s);
      check(s == T * L, "embedding-log counter");
      ev0 = dcoh_evicted;
      mmio_write(R_COMP_CMD, {25'b0, 1'b1, 1'b0, nb, 2'b0, OP_LOOKUP});
      wait_idle(8'h09);
      check(dcoh_evicted == ev0, "deferred lookup is not evicted");
      // feature interaction + top-MLP on the GPU: MLP log served meanwhile
      mmio_read(R_STATUS, s);
      if (!s[2]) begin mmio_write(R_CK_CMD, {30'b0, CK_MLP}); mlp_started++; end
      run_window(400);
      // the gradient of batch n arrives from CXL-GPU
      for (int t = 0; t < T; t++)
        for (int l = 0; l < VL; l++)
          cxlmem_write({1'b1, LADDR_W'(t * VL_MAX + l)}, grad_line(n * 100 + t * VL + l));
      begin
        automatic line_t gr;
        cxlmem_read({1'b1, LADDR_W'(1)}, gr);
        check(gr == grad_line(n * 100 + 1), "gradient window read-back");
      end
      // snapshot for the log and restore checks, then update the shadow
      pre.delete();
      for (int t = 0; t < T; t++)
        for (int j = 0; j < L; j++)
          for (int l = 0; l < VL; l++) begin
            automatic laddr_t a = ref_data_addr(t, idx[n][t][j], l);
            pre[a] = sh(a);
          end
      // embedding-log contents (slot n%2): metadata and pre-update vectors
      begin
        automatic line_t h = pm_peek(LOG_BASE + laddr_t'(b));
        check(h[31:0] == LOG_MAGIC && h[64] && h[63:32] == 32'(n) && h[127:96] == 32'(T * L),
              $sformatf("embedding-log header batch %0d", n));
        for (int t = 0; t < T; t++)
          for (int j = 0; j < L; j++) begin
            automatic int e = t * L + j;
            automatic laddr_t base = EMB_AREA + laddr_t'(b) * laddr_t'(EMB_SLOT_LINES) + laddr_t'(e * (VL_MAX + 1));
            automatic line_t  m = pm_peek(base);
            check(m[31:0] == 32'(idx[n][t][j]) && m[39:32] == 8'(t), "embedding-log metadata");
            for (int l = 0; l < VL; l++)
              check(pm_peek(base + laddr_t'(1 + l)) == pre[ref_data_addr(t, idx[n][t][j], l)],
                    "embedding-log vector");
          end
      end
      mmio_write(R_COMP_CMD, {27'b0, b, 2'b0, OP_UPDATE});
      wait_idle(8'h01);
      for (int t = 0; t < T; t++)
        for (int j = 0; j < L; j++)
          for (int l = 0; l < VL; l++) begin
            automatic laddr_t a = ref_data_addr(t, idx[n][t][j], l);
            shadow[a] = ref_sub(sh(a), grad_line(n * 100 + t * VL + l), LR, 1);
          end
      foreach (pre[a]) begin
        if (pm_peek(a) != sh(a)) $display("n=%0d a=%h pm=%h sh=%h pre=%h", n, a, pm_peek(a)[63:0], sh(a)[63:0], pre[a][63:0]);
        check(pm_peek(a) == sh(a), "embedding table after update");
      end
      // relaxed correction of batch n+1's reduced embeddings, then eviction
      mmio_write(R_COMP_CMD, {26'b0, b, nb, 2'b0, OP_CORRECT});
      wait_idle(8'h09);
      check_gpu_reduced(n + 1, "relaxed lookup");
      mmio_read(R_STATUS, s);
    end

    // failure during the last update: the table is restored from the log
    begin
      automatic bit b = (NB - 1) % 2;
      mmio_write(R_CK_CMD, {27'b0, b, 2'b0, CK_RESTORE});
      wait_idle(8'h40);
      mmio_read(R_STATUS, s);
      check(s[7], "restore succeeded");
      foreach (pre[a]) check(pm_peek(a) == pre[a], "table restored to its pre-update value");
    end

    // let the MLP log finish
    for (int k = 0; k < 20; k++) begin
      mmio_read(R_STATUS, s);
      if (!s[2]) break;
      run_window(400);
    end
    mmio_read(R_STATUS, s);
    check(s[5], "MLP log persistent flag");
    mmio_read(R_MLP_CNT, s);
    check(s == MLP_LINES, "MLP-log counter equals MLP size");
    begin
      automatic logic slot = dut.u_ckpt.mslot;
      automatic line_t h = pm_peek(LOG_BASE + 2 + laddr_t'(slot));
      check(h[31:0] == LOG_MAGIC && h[64] && h[127:96] == MLP_LINES, "MLP-log header valid");
      for (int k = 0; k < MLP_LINES; k++)
        check(pm_peek(MLP_AREA + laddr_t'(slot) * MLP_SLOT_LINES + laddr_t'(k)) ==
              gpu_line(MLP_BASE + haddr_t'(k * 64)), "MLP-log line");
    end
    repeat (50) @(negedge clk);
    check(!pm_peek(LOG_BASE + laddr_t'(NB % 2))[64], "old embedding checkpoint deleted");

    $display("mechanisms: raw=%0d conflict=%0d relaxed_match=%0d mlp_span=%0d gpu_held=%0d evicted=%0d deleted=%0d mlp_logs=%0d",
             n_raw, n_conflict, n_match, n_span, u_gpu.rd_held, dcoh_evicted, del_cnt, mlp_started);
    check(n_raw > 0, "RAW penalty occurred");
    check(n_conflict > 0, "system-bus conflict occurred");
    check(n_match > 0, "relaxed correction with shared indices occurred");
    check(n_span > 0, "MLP log spanned a batch boundary");
    check(u_gpu.rd_held > 0, "MLP read held outside the GPU window");
    check(dcoh_evicted > 0, "DCOH evictions occurred");
    check(del_cnt > 0, "old checkpoint deletion occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
