// cxl_controller: CXL-MEM's Type-2 endpoint controller (transaction side).
//
// Holds the MMIO registers (CXL.io) and the DCOH, as drawn in the paper, and
// does the controller's routing:
//  * CXL.cache device-to-host channel: the DCOH's write-backs of reduced
//    embedding lines (id 0) and the checkpointing logic's MLP-parameter reads
//    (id 1) share one request channel. A round-robin arbiter picks between
//    them; the response (h2d) carries the id and is routed back. Each source
//    has at most one request outstanding, so responses may return in any order.
//  * CXL.mem host-to-device channel: line address bit LADDR_W selects the
//    gradient window. Writes there go to the gradient scratchpad (this is how
//    CXL-GPU's DCOH flush delivers embedding gradients); reads return it.
//    All other addresses are forwarded to PMEM through the system bus. One
//    request is handled at a time; s2m_valid pulses with the response.
// The flit, link and physical layers of CXL are not part of this module: the
// channels above are their transaction-level payloads. The arbitration, id
// routing and gradient window are this design's choices.
module cxl_controller
  import trainingcxl_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // CXL.io (MMIO)
  input  logic             mmio_wr,
  input  logic             mmio_rd,
  input  logic [15:0]      mmio_addr,
  input  logic [31:0]      mmio_wdata,
  output logic [31:0]      mmio_rdata,
  // CXL.cache device-to-host / host-to-device
  output logic             d2h_valid,
  input  logic             d2h_ready,
  output d2h_req_t         d2h_req,
  input  logic             h2d_valid,
  input  h2d_rsp_t         h2d_rsp,
  // CXL.mem master-to-subordinate / subordinate-to-master
  input  logic             m2s_valid,
  output logic             m2s_ready,
  input  logic             m2s_we,
  input  logic [LADDR_W:0] m2s_addr,
  input  line_t            m2s_wdata,
  output logic             s2m_valid,
  output line_t            s2m_rdata,
  // configuration and doorbells to the device
  output logic [31:0]      vec_len,
  output logic [31:0]      lr,
  output haddr_t           mlp_addr,
  output logic [31:0]      mlp_size,
  output logic [7:0]       num_tables,
  output logic [7:0]       num_lookups,
  output logic [31:0]      batch_id,
  output logic             comp_cmd_valid,
  output comp_op_e         comp_cmd_op,
  output logic             comp_cmd_bank,
  output logic             comp_cmd_bank2,
  output logic             comp_cmd_defer,
  output logic             ck_cmd_valid,
  output ck_op_e           ck_cmd_op,
  output logic             ck_cmd_bank,
  output logic             sf_wr_en,
  output logic             sf_wr_bank,
  output logic [ENT_W-1:0] sf_wr_entry,
  output logic [IDX_W-1:0] sf_wr_data,
  input  logic [6:0]       dev_status,   // status bits 0..2 and 4..7
  input  logic [31:0]      emb_cnt,
  input  logic [31:0]      mlp_cnt,
  // DCOH side
  input  logic             red_mark_valid,
  input  logic [SPL_W-1:0] red_mark_line,
  input  logic             flush_start,
  output logic [SPL_W-1:0] red_rd_addr,
  input  line_t            red_rd_data,
  output logic             dcoh_busy,
  output logic [31:0]      dcoh_evicted,
  // checkpoint DMA CXL.cache reads
  input  logic             cc_valid,
  output logic             cc_ready,
  input  haddr_t           cc_addr,
  output logic             cc_rsp_valid,
  output line_t            cc_rsp_data,
  // gradient scratchpad
  output logic             grad_we,
  output logic [SPL_W-1:0] grad_waddr,
  output line_t            grad_wdata,
  output logic [SPL_W-1:0] grad_raddr,
  input  line_t            grad_rdata,
  // system bus master (CXL.mem to PMEM)
  output logic             bus_valid,
  input  logic             bus_ready,
  output mem_req_t         bus_req,
  input  logic             bus_rsp_valid,
  input  line_t            bus_rsp_data
);
  // ---------------- MMIO registers ----------------------------------------
  haddr_t red_base;
  logic [7:0] status;
  assign status = {dev_status[6:3], dcoh_busy, dev_status[2:0]};

  mmio_regs u_mmio (
    .clk, .rst_n, .mmio_wr, .mmio_rd, .mmio_addr, .mmio_wdata, .mmio_rdata,
    .vec_len, .lr, .mlp_addr, .mlp_size, .num_tables, .num_lookups, .batch_id,
    .red_base, .comp_cmd_valid, .comp_cmd_op, .comp_cmd_bank, .comp_cmd_bank2, .comp_cmd_defer,
    .ck_cmd_valid, .ck_cmd_op, .ck_cmd_bank,
    .sf_wr_en, .sf_wr_bank, .sf_wr_entry, .sf_wr_data,
    .status, .emb_cnt, .mlp_cnt
  );

  // ---------------- DCOH --------------------------------------------------
  logic   wb_valid, wb_ready, wb_ack;
  haddr_t wb_addr;
  line_t  wb_data;

  dcoh u_dcoh (
    .clk, .rst_n, .mark_valid(red_mark_valid), .mark_line(red_mark_line),
    .flush_start, .red_base, .rd_addr(red_rd_addr), .rd_data(red_rd_data),
    .wb_valid, .wb_ready, .wb_addr, .wb_data, .wb_ack,
    .busy(dcoh_busy), .evicted(dcoh_evicted)
  );

  // ---------------- CXL.cache D2H arbiter ---------------------------------
  logic last_grant;   // id of the last granted source
  logic pick;         // id granted now
  always_comb begin
    if (wb_valid && cc_valid) pick = ~last_grant;
    else                      pick = cc_valid;
    d2h_valid     = wb_valid || cc_valid;
    d2h_req.id    = pick;
    d2h_req.op    = pick ? D2H_RD : D2H_WR;
    d2h_req.addr  = pick ? cc_addr : wb_addr;
    d2h_req.wdata = pick ? '0 : wb_data;
    wb_ready      = d2h_ready && d2h_valid && !pick;
    cc_ready      = d2h_ready && d2h_valid &&  pick;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_grant <= 1'b1;
    else if (d2h_valid && d2h_ready) last_grant <= pick;
  end
  assign wb_ack       = h2d_valid && !h2d_rsp.id;
  assign cc_rsp_valid = h2d_valid &&  h2d_rsp.id;
  assign cc_rsp_data  = h2d_rsp.rdata;

  // ---------------- CXL.mem inbound ---------------------------------------
  typedef enum logic [1:0] { M_IDLE, M_BUS, M_BUSW, M_GRAD } mstate_e;
  mstate_e  mstate;
  mem_req_t mreq_q;
  logic     g_rd;
  logic     in_grad;

  assign in_grad    = m2s_addr[LADDR_W];
  assign m2s_ready  = (mstate == M_IDLE);
  assign grad_we    = m2s_valid && m2s_ready && in_grad && m2s_we;
  assign grad_waddr = SPL_W'(m2s_addr);
  assign grad_wdata = m2s_wdata;
  assign grad_raddr = SPL_W'(m2s_addr);
  assign bus_valid  = (mstate == M_BUS);
  assign bus_req    = mreq_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mstate <= M_IDLE; mreq_q <= '0; g_rd <= 1'b0;
      s2m_valid <= 1'b0; s2m_rdata <= '0;
    end else begin
      s2m_valid <= 1'b0;
      unique case (mstate)
        M_IDLE: if (m2s_valid) begin
          if (in_grad) begin g_rd <= !m2s_we; mstate <= M_GRAD; end
          else begin
            mreq_q.we    <= m2s_we;
            mreq_q.addr  <= m2s_addr[LADDR_W-1:0];
            mreq_q.wdata <= m2s_wdata;
            mstate <= M_BUS;
          end
        end
        M_GRAD: begin   // gradient scratchpad read data is ready now
          s2m_valid <= 1'b1;
          s2m_rdata <= g_rd ? grad_rdata : '0;
          mstate <= M_IDLE;
        end
        M_BUS:  if (bus_ready) mstate <= M_BUSW;
        M_BUSW: if (bus_rsp_valid) begin
          s2m_valid <= 1'b1; s2m_rdata <= bus_rsp_data; mstate <= M_IDLE;
        end
        default: mstate <= M_IDLE;
      endcase
    end
  end
endmodule
