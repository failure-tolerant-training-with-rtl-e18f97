// ckpt_logic: CXL-MEM's checkpointing logic (batch-aware undo logging).
//
// A DMA engine with two counters, the embedding-log counter (vectors logged)
// and the MLP-log counter (parameter lines logged). It works in the
// background, between the computing logic's operations, on three jobs:
//
// Embedding log (CK_EMB, bank b, batch B): using the indices of the coming
// batch from the sparse feature buffer, copy every embedding vector the batch
// will update from the data region to embedding-log slot B mod 2, then write
// the slot header with its valid bit: that write is the persistent flag
// (emb_persist). Each log entry is one metadata line {table, row} followed by
// the vector's lines. The slot header is invalidated first, so a log cut short
// by a power failure is never taken as valid.
//
// MLP log (CK_MLP): read the MLP parameters from CXL-GPU over CXL.cache,
// line by line from the MMIO address for the MMIO size, and store them in the
// other MLP-log slot. When the counter equals the size the slot header is
// written valid (mlp_persist). The MLP log is relaxed: it yields to embedding
// logs, an outstanding CXL.cache read does not block the engine (its data is
// captured whenever CXL-GPU answers), and the log runs across batch
// boundaries until complete, since CXL-GPU answers only while it computes
// feature interaction and top-MLP. A CK_MLP while one is running is ignored.
//
// When both persistent flags are set, the old checkpoint is deleted: the
// headers of the other embedding and MLP slot are written invalid (del_cnt).
//
// Restore (CK_RESTORE, slot s): if slot s's header is valid, write every
// logged vector back to the data region (restore_ok), undoing a partial
// embedding update after a failure.
//
// The steps and flags follow the paper; the slot layout, header format and
// the priority restore > embedding log > MLP log are this design's choices.
// Memory master: one request outstanding; CXL.cache master: one read
// outstanding, cc_valid/cc_ready then a cc_rsp_valid pulse with the data.
module ckpt_logic
  import trainingcxl_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             cmd_valid,
  input  ck_op_e           cmd_op,
  input  logic             cmd_bank,
  // configuration (MMIO)
  input  logic [7:0]       num_tables,
  input  logic [7:0]       num_lookups,
  input  logic [31:0]      vec_len,
  input  haddr_t           mlp_addr,
  input  logic [31:0]      mlp_size,
  input  logic [31:0]      batch_id,
  // sparse feature buffer read port
  output logic             sf_bank,
  output logic [ENT_W-1:0] sf_entry,
  input  logic [IDX_W-1:0] sf_data,
  // system bus master
  output logic             mem_valid,
  input  logic             mem_ready,
  output mem_req_t         mem_req,
  input  logic             mem_rsp_valid,
  input  line_t            mem_rsp_data,
  // CXL.cache read master (to CXL-GPU)
  output logic             cc_valid,
  input  logic             cc_ready,
  output haddr_t           cc_addr,
  input  logic             cc_rsp_valid,
  input  line_t            cc_rsp_data,
  // status
  output logic             emb_busy,
  output logic             mlp_busy,
  output logic             restore_busy,
  output logic             emb_persist,
  output logic             mlp_persist,
  output logic             restore_ok,
  output logic [31:0]      emb_cnt,
  output logic [31:0]      mlp_cnt,
  output logic [31:0]      del_cnt
);
  typedef enum logic [4:0] {
    S_DISP, S_MEM, S_MEMW,
    S_E_START, S_E_SF, S_E_SFW, S_E_RD, S_E_WR, S_E_NEXT, S_E_FIN,
    S_M_REQ, S_M_NEXT, S_M_FIN,
    S_D1, S_D2, S_D3,
    S_R_HDR, S_R_META, S_R_M2, S_R_RD, S_R_WR, S_R_NEXT
  } state_e;
  state_e state, ret;

  // memory request staged for S_MEM
  logic   mq_we;
  laddr_t mq_addr;
  line_t  mq_wdata, mrsp;

  logic        emb_pend, emb_bank_q, eslot;
  logic [31:0] emb_batch_q;
  logic        mlp_active, mslot, mlp_hdr_clr;
  logic [31:0] mlp_lines, mlp_issued, mlp_batch_q;
  logic        cc_pending, cc_have;
  line_t       cc_data;
  logic        rst_pend, rslot;
  logic [31:0] r_n;

  logic [7:0]        t, j;
  logic [VL_BITS:0]  l, vl;
  logic [31:0]       e;
  logic [IDX_W-1:0]  idx_q;

  function automatic line_t header(input logic valid, input logic [31:0] batch,
                                   input logic [31:0] count);
    line_t h;
    h = '0;
    h[31:0]   = LOG_MAGIC;
    h[63:32]  = batch;
    h[64]     = valid;
    h[127:96] = count;
    return h;
  endfunction

  function automatic laddr_t emb_hdr(input logic s);
    return LOG_BASE + laddr_t'(s);
  endfunction
  function automatic laddr_t mlp_hdr(input logic s);
    return LOG_BASE + laddr_t'(2) + laddr_t'(s);
  endfunction
  function automatic laddr_t emb_line(input logic s, input logic [31:0] ent,
                                      input int off);
    return EMB_AREA + laddr_t'(s) * laddr_t'(EMB_SLOT_LINES) +
           laddr_t'(ent) * laddr_t'(VL_MAX + 1) + laddr_t'(off);
  endfunction

  assign emb_busy     = emb_pend;
  assign mlp_busy     = mlp_active;
  assign restore_busy = rst_pend;

  assign sf_bank  = emb_bank_q;
  assign sf_entry = ENT_W'(int'(t) * MAX_LOOKUPS + int'(j));

  assign mem_valid     = (state == S_MEM);
  assign mem_req.we    = mq_we;
  assign mem_req.addr  = mq_addr;
  assign mem_req.wdata = mq_wdata;

  assign cc_valid = (state == S_M_REQ);
  assign cc_addr  = mlp_addr + {26'b0, mlp_issued, 6'b0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_DISP; ret <= S_DISP;
      mq_we <= 1'b0; mq_addr <= '0; mq_wdata <= '0; mrsp <= '0;
      emb_pend <= 1'b0; emb_bank_q <= 1'b0; eslot <= 1'b0; emb_batch_q <= '0;
      mlp_active <= 1'b0; mslot <= 1'b1; mlp_hdr_clr <= 1'b0; mlp_lines <= '0; mlp_issued <= '0;
      mlp_batch_q <= '0; cc_pending <= 1'b0; cc_have <= 1'b0; cc_data <= '0;
      rst_pend <= 1'b0; rslot <= 1'b0; r_n <= '0;
      t <= '0; j <= '0; l <= '0; vl <= '0; e <= '0; idx_q <= '0;
      emb_persist <= 1'b0; mlp_persist <= 1'b0; restore_ok <= 1'b0;
      emb_cnt <= '0; mlp_cnt <= '0; del_cnt <= '0;
    end else begin
      // ---- commands (accepted in any state) -------------------------------
      if (cmd_valid) begin
        unique case (cmd_op)
          CK_EMB: if (!emb_pend) begin
            emb_pend <= 1'b1; emb_bank_q <= cmd_bank; emb_batch_q <= batch_id;
          end
          CK_MLP: if (!mlp_active) begin
            mlp_active  <= 1'b1;
            mlp_hdr_clr <= 1'b1;
            mslot       <= ~mslot;
            mlp_persist <= 1'b0;
            mlp_cnt     <= '0;
            mlp_issued  <= '0;
            mlp_lines   <= (mlp_size + 32'd63) >> 6;
            mlp_batch_q <= batch_id;
          end
          CK_RESTORE: if (!rst_pend) begin
            rst_pend <= 1'b1; rslot <= cmd_bank; restore_ok <= 1'b0;
          end
          default: ;
        endcase
      end
      // ---- CXL.cache responses are captured whenever they come -------------
      if (cc_rsp_valid && cc_pending) begin
        cc_pending <= 1'b0; cc_have <= 1'b1; cc_data <= cc_rsp_data;
      end

      unique case (state)
        // ---- dispatcher ----------------------------------------------------
        S_DISP: begin
          vl <= (vec_len > 32'(LANES)) ? (VL_BITS+1)'(VL_MAX) : (VL_BITS+1)'(1);
          if (rst_pend) begin
            mq_we <= 1'b0; mq_addr <= emb_hdr(rslot); ret <= S_R_HDR; state <= S_MEM;
          end else if (emb_pend) begin
            state <= S_E_START;
          end else if (mlp_active && mlp_hdr_clr) begin
            // new MLP log: invalidate its slot header first
            mlp_hdr_clr <= 1'b0;
            mq_we <= 1'b1; mq_addr <= mlp_hdr(mslot);
            mq_wdata <= header(1'b0, mlp_batch_q, '0); ret <= S_DISP; state <= S_MEM;
          end else if (mlp_active && cc_have) begin
            cc_have <= 1'b0;
            mq_we <= 1'b1;
            mq_addr <= MLP_AREA + laddr_t'(mslot) * MLP_SLOT_LINES + laddr_t'(mlp_cnt);
            mq_wdata <= cc_data; ret <= S_M_NEXT; state <= S_MEM;
          end else if (mlp_active && !cc_pending && mlp_issued < mlp_lines) begin
            state <= S_M_REQ;
          end else if (mlp_active && !cc_pending && mlp_cnt == mlp_lines) begin
            mq_we <= 1'b1; mq_addr <= mlp_hdr(mslot);
            mq_wdata <= header(1'b1, mlp_batch_q, mlp_cnt); ret <= S_M_FIN; state <= S_MEM;
          end
        end
        // ---- one memory access, then continue at ret -------------------------
        S_MEM:  if (mem_ready) state <= S_MEMW;
        S_MEMW: if (mem_rsp_valid) begin mrsp <= mem_rsp_data; state <= ret; end
        // ---- embedding log ---------------------------------------------------
        S_E_START: begin
          eslot <= emb_batch_q[0];
          emb_persist <= 1'b0; emb_cnt <= '0;
          t <= '0; j <= '0; l <= '0; e <= '0;
          mq_we <= 1'b1; mq_addr <= emb_hdr(emb_batch_q[0]);
          mq_wdata <= header(1'b0, emb_batch_q, '0);
          ret <= (num_tables == 0 || num_lookups == 0) ? S_E_NEXT : S_E_SF;
          state <= S_MEM;
        end
        S_E_SF:  state <= S_E_SFW;
        S_E_SFW: begin
          idx_q <= sf_data; l <= '0;
          mq_we <= 1'b1; mq_addr <= emb_line(eslot, e, 0);
          mq_wdata <= line_t'({t, sf_data});
          ret <= S_E_RD; state <= S_MEM;
        end
        S_E_RD: begin
          mq_we <= 1'b0; mq_addr <= data_addr(t[TBL_BITS-1:0], idx_q, l[VL_BITS-1:0]);
          ret <= S_E_WR; state <= S_MEM;
        end
        S_E_WR: begin
          mq_we <= 1'b1; mq_addr <= emb_line(eslot, e, 1 + int'(l));
          mq_wdata <= mrsp; ret <= S_E_NEXT; state <= S_MEM;
        end
        S_E_NEXT: begin
          if (num_tables != 0 && num_lookups != 0 && l + 1 < vl) begin
            l <= l + 1'b1; state <= S_E_RD;
          end else begin
            logic last;
            last = (num_tables == 0 || num_lookups == 0) ||
                   ((j + 1 >= num_lookups) && (t + 1 >= num_tables));
            if (num_tables != 0 && num_lookups != 0) begin
              emb_cnt <= emb_cnt + 1'b1;
              e <= e + 1'b1;
              if (j + 1 < num_lookups) j <= j + 1'b1;
              else begin j <= '0; t <= t + 1'b1; end
            end
            if (last) begin
              mq_we <= 1'b1; mq_addr <= emb_hdr(eslot);
              mq_wdata <= header(1'b1, emb_batch_q,
                                 (num_tables != 0 && num_lookups != 0) ? e + 1 : 32'd0);
              ret <= S_E_FIN; state <= S_MEM;
            end else state <= S_E_SF;
          end
        end
        S_E_FIN: begin
          emb_persist <= 1'b1; emb_pend <= 1'b0;
          state <= mlp_persist ? S_D1 : S_DISP;
        end
        // ---- MLP log -----------------------------------------------------------
        S_M_REQ: if (cc_ready) begin
          cc_pending <= 1'b1; mlp_issued <= mlp_issued + 1'b1; state <= S_DISP;
        end
        S_M_NEXT: begin mlp_cnt <= mlp_cnt + 1'b1; state <= S_DISP; end
        S_M_FIN: begin
          mlp_persist <= 1'b1; mlp_active <= 1'b0;
          state <= emb_persist ? S_D1 : S_DISP;
        end
        // ---- delete the old checkpoint -------------------------------------------
        S_D1: begin
          mq_we <= 1'b1; mq_addr <= emb_hdr(~eslot); mq_wdata <= header(1'b0, '0, '0);
          ret <= S_D2; state <= S_MEM;
        end
        S_D2: begin
          mq_we <= 1'b1; mq_addr <= mlp_hdr(~mslot); mq_wdata <= header(1'b0, '0, '0);
          ret <= S_D3; state <= S_MEM;
        end
        S_D3: begin del_cnt <= del_cnt + 1'b1; state <= S_DISP; end
        // ---- restore -------------------------------------------------------------
        S_R_HDR: begin
          if (mrsp[31:0] == LOG_MAGIC && mrsp[64] && mrsp[127:96] != 0) begin
            r_n <= mrsp[127:96]; e <= '0; state <= S_R_META;
          end else begin
            restore_ok <= mrsp[31:0] == LOG_MAGIC && mrsp[64];
            rst_pend <= 1'b0; state <= S_DISP;
          end
        end
        S_R_META: begin
          mq_we <= 1'b0; mq_addr <= emb_line(rslot, e, 0); ret <= S_R_M2; state <= S_MEM;
        end
        S_R_M2: begin
          idx_q <= mrsp[IDX_W-1:0]; t <= mrsp[IDX_W +: 8]; l <= '0; state <= S_R_RD;
        end
        S_R_RD: begin
          mq_we <= 1'b0; mq_addr <= emb_line(rslot, e, 1 + int'(l));
          ret <= S_R_WR; state <= S_MEM;
        end
        S_R_WR: begin
          mq_we <= 1'b1; mq_addr <= data_addr(t[TBL_BITS-1:0], idx_q, l[VL_BITS-1:0]);
          mq_wdata <= mrsp; ret <= S_R_NEXT; state <= S_MEM;
        end
        S_R_NEXT: begin
          if (l + 1 < vl) begin l <= l + 1'b1; state <= S_R_RD; end
          else if (e + 1 < r_n) begin e <= e + 1'b1; state <= S_R_META; end
          else begin restore_ok <= 1'b1; rst_pend <= 1'b0; state <= S_DISP; end
        end
        default: state <= S_DISP;
      endcase
    end
  end
endmodule
