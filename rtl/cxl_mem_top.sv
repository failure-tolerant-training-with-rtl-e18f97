// cxl_mem_top: the CXL-MEM device, a persistent-memory expander with near-data
// embedding processing and automatic checkpointing.
//
// Frontend: the CXL controller (MMIO registers, DCOH, CXL.cache arbiter,
// CXL.mem decode), the computing logic with its two scratchpads (reduced
// embeddings, gradients), the checkpointing logic and the sparse feature
// buffer. Backend: NUM_MC memory controllers behind the system bus, each
// driving one PMEM media port, line-interleaved. Bus masters: 0 computing
// logic, 1 checkpointing logic, 2 CXL.mem from the host or peers.
//
// A training batch, driven by host software over MMIO (see the README):
// write the batch's indices, CK_EMB (embedding log, background), OP_LOOKUP
// (reduced embeddings, then the DCOH evicts them to CXL-GPU), CK_MLP (MLP
// log, served while CXL-GPU answers), the gradient arrives by CXL.mem writes
// into the gradient window, OP_CORRECT (relaxed lookup of the next batch,
// which was looked up early on this batch's table) and OP_UPDATE.
//
// The block structure follows the paper's CXL-MEM figure: CXL controller with
// MMIO registers and DCOH, computing logic, checkpoint logic, system bus and
// four MC/PMEM pairs. The CXL link/PHY layers and the PMEM devices are outside
// this module; their transaction-level channels and media ports are its ports.
module cxl_mem_top
  import trainingcxl_pkg::*;
#(
  parameter int NUM_MC   = 4,
  parameter int BASE_LAT = 4,
  parameter int RD_X     = 3,
  parameter int WR_X     = 7
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // CXL.io
  input  logic                   mmio_wr,
  input  logic                   mmio_rd,
  input  logic [15:0]            mmio_addr,
  input  logic [31:0]            mmio_wdata,
  output logic [31:0]            mmio_rdata,
  // CXL.cache
  output logic                   d2h_valid,
  input  logic                   d2h_ready,
  output d2h_req_t               d2h_req,
  input  logic                   h2d_valid,
  input  h2d_rsp_t               h2d_rsp,
  // CXL.mem
  input  logic                   m2s_valid,
  output logic                   m2s_ready,
  input  logic                   m2s_we,
  input  logic [LADDR_W:0]       m2s_addr,
  input  line_t                  m2s_wdata,
  output logic                   s2m_valid,
  output line_t                  s2m_rdata,
  // PMEM media ports
  output logic   [NUM_MC-1:0]    med_re,
  output logic   [NUM_MC-1:0]    med_we,
  output laddr_t [NUM_MC-1:0]    med_addr,
  output line_t  [NUM_MC-1:0]    med_wdata,
  input  line_t  [NUM_MC-1:0]    med_rdata,
  // observation
  output logic   [NUM_MC-1:0]    raw_hit,
  output logic                   bus_conflict,
  output logic                   comp_done,
  output logic   [15:0]          last_matches,
  output logic   [31:0]          del_cnt,
  output logic   [31:0]          dcoh_evicted,
  output logic                   dcoh_busy
);
  localparam int NM = 3;
  localparam int TAG_W = 2;

  // configuration
  logic [31:0] vec_len, lr, mlp_size, batch_id, emb_cnt, mlp_cnt;
  haddr_t      mlp_addr;
  logic [7:0]  num_tables, num_lookups;
  // commands
  logic        comp_cmd_valid, comp_cmd_bank, comp_cmd_bank2, comp_cmd_defer;
  comp_op_e    comp_cmd_op;
  logic        ck_cmd_valid, ck_cmd_bank;
  ck_op_e      ck_cmd_op;
  // sparse feature buffer
  logic             sf_wr_en, sf_wr_bank, sfa_bank, sfb_bank;
  logic [ENT_W-1:0] sf_wr_entry, sfa_entry, sfb_entry;
  logic [IDX_W-1:0] sf_wr_data, sfa_data, sfb_data;
  // scratchpads
  logic             red_we, grad_we;
  logic [SPL_W-1:0] red_waddr, red_raddr, red_rd_addr, grad_waddr, grad_raddr_c, grad_raddr_x;
  line_t            red_wdata, red_rdata, red_rd_data, grad_wdata, grad_rdata_c, grad_rdata_x;
  // status
  logic comp_busy, flush_req;
  logic emb_busy, mlp_busy, restore_busy, emb_persist, mlp_persist, restore_ok;
  // checkpoint CXL.cache
  logic   cc_valid, cc_ready, cc_rsp_valid;
  haddr_t cc_addr;
  line_t  cc_rsp_data;
  // system bus
  logic     [NM-1:0] m_valid, m_ready, m_rsp_valid;
  mem_req_t [NM-1:0] m_req;
  line_t    [NM-1:0] m_rsp_data;
  logic     [NUM_MC-1:0] s_valid, s_ready, s_rsp_valid;
  mem_req_t [NUM_MC-1:0] s_req;
  logic [NUM_MC-1:0][TAG_W-1:0] s_tag, s_rsp_tag;
  line_t    [NUM_MC-1:0] s_rsp_data;

  cxl_controller u_cxl (
    .clk, .rst_n,
    .mmio_wr, .mmio_rd, .mmio_addr, .mmio_wdata, .mmio_rdata,
    .d2h_valid, .d2h_ready, .d2h_req, .h2d_valid, .h2d_rsp,
    .m2s_valid, .m2s_ready, .m2s_we, .m2s_addr, .m2s_wdata, .s2m_valid, .s2m_rdata,
    .vec_len, .lr, .mlp_addr, .mlp_size, .num_tables, .num_lookups, .batch_id,
    .comp_cmd_valid, .comp_cmd_op, .comp_cmd_bank, .comp_cmd_bank2, .comp_cmd_defer,
    .ck_cmd_valid, .ck_cmd_op, .ck_cmd_bank,
    .sf_wr_en, .sf_wr_bank, .sf_wr_entry, .sf_wr_data,
    .dev_status({restore_ok, restore_busy, mlp_persist, emb_persist, mlp_busy, emb_busy, comp_busy}),
    .emb_cnt, .mlp_cnt,
    .red_mark_valid(red_we), .red_mark_line(red_waddr), .flush_start(flush_req),
    .red_rd_addr, .red_rd_data, .dcoh_busy, .dcoh_evicted,
    .cc_valid, .cc_ready, .cc_addr, .cc_rsp_valid, .cc_rsp_data,
    .grad_we, .grad_waddr, .grad_wdata, .grad_raddr(grad_raddr_x), .grad_rdata(grad_rdata_x),
    .bus_valid(m_valid[2]), .bus_ready(m_ready[2]), .bus_req(m_req[2]),
    .bus_rsp_valid(m_rsp_valid[2]), .bus_rsp_data(m_rsp_data[2])
  );

  sparse_feature_buf u_sf (
    .clk, .wr_en(sf_wr_en), .wr_bank(sf_wr_bank), .wr_entry(sf_wr_entry), .wr_data(sf_wr_data),
    .rda_bank(sfa_bank), .rda_entry(sfa_entry), .rda_data(sfa_data),
    .rdb_bank(sfb_bank), .rdb_entry(sfb_entry), .rdb_data(sfb_data)
  );

  scratchpad u_red (
    .clk, .rst_n, .wr_en(red_we), .wr_addr(red_waddr), .wr_data(red_wdata),
    .rda_addr(red_raddr), .rda_data(red_rdata),
    .rdb_addr(red_rd_addr), .rdb_data(red_rd_data)
  );

  scratchpad u_grad (
    .clk, .rst_n, .wr_en(grad_we), .wr_addr(grad_waddr), .wr_data(grad_wdata),
    .rda_addr(grad_raddr_c), .rda_data(grad_rdata_c),
    .rdb_addr(grad_raddr_x), .rdb_data(grad_rdata_x)
  );

  compute_logic u_comp (
    .clk, .rst_n,
    .cmd_valid(comp_cmd_valid), .cmd_op(comp_cmd_op), .cmd_bank(comp_cmd_bank),
    .cmd_bank2(comp_cmd_bank2), .cmd_defer(comp_cmd_defer), .busy(comp_busy), .done(comp_done), .flush_req,
    .vec_len, .lr, .num_tables, .num_lookups,
    .sf_bank(sfa_bank), .sf_entry(sfa_entry), .sf_data(sfa_data),
    .mem_valid(m_valid[0]), .mem_ready(m_ready[0]), .mem_req(m_req[0]),
    .mem_rsp_valid(m_rsp_valid[0]), .mem_rsp_data(m_rsp_data[0]),
    .red_we, .red_waddr, .red_wdata, .red_raddr, .red_rdata,
    .grad_raddr(grad_raddr_c), .grad_rdata(grad_rdata_c), .last_matches
  );

  ckpt_logic u_ckpt (
    .clk, .rst_n,
    .cmd_valid(ck_cmd_valid), .cmd_op(ck_cmd_op), .cmd_bank(ck_cmd_bank),
    .num_tables, .num_lookups, .vec_len, .mlp_addr, .mlp_size, .batch_id,
    .sf_bank(sfb_bank), .sf_entry(sfb_entry), .sf_data(sfb_data),
    .mem_valid(m_valid[1]), .mem_ready(m_ready[1]), .mem_req(m_req[1]),
    .mem_rsp_valid(m_rsp_valid[1]), .mem_rsp_data(m_rsp_data[1]),
    .cc_valid, .cc_ready, .cc_addr, .cc_rsp_valid, .cc_rsp_data,
    .emb_busy, .mlp_busy, .restore_busy, .emb_persist, .mlp_persist, .restore_ok,
    .emb_cnt, .mlp_cnt, .del_cnt
  );

  system_bus #(.NM(NM), .NS(NUM_MC), .TAG_W(TAG_W)) u_bus (
    .clk, .rst_n, .m_valid, .m_ready, .m_req, .m_rsp_valid, .m_rsp_data,
    .s_valid, .s_ready, .s_req, .s_tag, .s_rsp_valid, .s_rsp_data, .s_rsp_tag,
    .conflict(bus_conflict)
  );

  for (genvar i = 0; i < NUM_MC; i++) begin : g_mc
    pmem_mc #(.BASE_LAT(BASE_LAT), .RD_X(RD_X), .WR_X(WR_X), .TAG_W(TAG_W)) u_mc (
      .clk, .rst_n,
      .req_valid(s_valid[i]), .req_ready(s_ready[i]), .req(s_req[i]), .req_tag(s_tag[i]),
      .rsp_valid(s_rsp_valid[i]), .rsp_data(s_rsp_data[i]), .rsp_tag(s_rsp_tag[i]),
      .med_re(med_re[i]), .med_we(med_we[i]), .med_addr(med_addr[i]),
      .med_wdata(med_wdata[i]), .med_rdata(med_rdata[i]), .raw_hit(raw_hit[i])
    );
  end
endmodule
