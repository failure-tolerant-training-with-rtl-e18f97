// mmio_regs: CXL-MEM's MMIO register file (CXL.io).
//
// The host's training software configures the computing and checkpointing
// logic here, as the paper describes: embedding vector length and learning
// rate for the embedding operations, the MLP parameters' address and size in
// CXL-GPU memory for the MLP log, and, for every batch, the sparse features
// (embedding indices), written through a window at 0x8000 + 4*entry into the
// bank chosen by R_SF_BANK. Writes to R_COMP_CMD and R_CK_CMD are doorbells
// that pulse a command to the computing or checkpointing logic for one cycle.
// The map (trainingcxl_pkg R_*), the doorbells, the status word, the batch
// shape registers and the reduced-embedding address are this design's own.
//
// Timing: a write takes effect at the clock edge it is sampled on; read data
// (mmio_rdata) is registered and valid in the cycle after mmio_rd.
// STATUS bits: 0 computing busy, 1 embedding log busy, 2 MLP log busy,
// 3 DCOH busy, 4 embedding log persistent, 5 MLP log persistent,
// 6 restore busy, 7 restore succeeded.
module mmio_regs
  import trainingcxl_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mmio_wr,
  input  logic             mmio_rd,
  input  logic [15:0]      mmio_addr,
  input  logic [31:0]      mmio_wdata,
  output logic [31:0]      mmio_rdata,
  // configuration
  output logic [31:0]      vec_len,
  output logic [31:0]      lr,
  output haddr_t           mlp_addr,
  output logic [31:0]      mlp_size,
  output logic [7:0]       num_tables,
  output logic [7:0]       num_lookups,
  output logic [31:0]      batch_id,
  output haddr_t           red_base,
  // doorbells
  output logic             comp_cmd_valid,
  output comp_op_e         comp_cmd_op,
  output logic             comp_cmd_bank,
  output logic             comp_cmd_bank2,
  output logic             comp_cmd_defer,
  output logic             ck_cmd_valid,
  output ck_op_e           ck_cmd_op,
  output logic             ck_cmd_bank,
  // sparse feature buffer write port
  output logic             sf_wr_en,
  output logic             sf_wr_bank,
  output logic [ENT_W-1:0] sf_wr_entry,
  output logic [IDX_W-1:0] sf_wr_data,
  // status inputs
  input  logic [7:0]       status,
  input  logic [31:0]      emb_cnt,
  input  logic [31:0]      mlp_cnt
);
  logic sf_bank_q;
  logic in_win;

  assign in_win      = mmio_addr[15];
  assign sf_wr_en    = mmio_wr && in_win;
  assign sf_wr_bank  = sf_bank_q;
  assign sf_wr_entry = ENT_W'(mmio_addr[14:2]);
  assign sf_wr_data  = mmio_wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vec_len <= 32'(MAX_DIM); lr <= '0; mlp_addr <= '0; mlp_size <= '0;
      num_tables <= '0; num_lookups <= '0; batch_id <= '0; red_base <= '0;
      sf_bank_q <= 1'b0; mmio_rdata <= '0;
      comp_cmd_valid <= 1'b0; comp_cmd_op <= OP_LOOKUP; comp_cmd_bank <= 1'b0;
      comp_cmd_bank2 <= 1'b0; comp_cmd_defer <= 1'b0;
      ck_cmd_valid <= 1'b0; ck_cmd_op <= CK_EMB; ck_cmd_bank <= 1'b0;
    end else begin
      comp_cmd_valid <= 1'b0;
      ck_cmd_valid   <= 1'b0;
      if (mmio_wr && !in_win) begin
        unique case (mmio_addr)
          R_COMP_CMD: begin
            comp_cmd_valid <= 1'b1;
            comp_cmd_op    <= comp_op_e'(mmio_wdata[1:0]);
            comp_cmd_bank  <= mmio_wdata[4];
            comp_cmd_bank2 <= mmio_wdata[5];
            comp_cmd_defer <= mmio_wdata[6];
          end
          R_CK_CMD: begin
            ck_cmd_valid <= 1'b1;
            ck_cmd_op    <= ck_op_e'(mmio_wdata[1:0]);
            ck_cmd_bank  <= mmio_wdata[4];
          end
          R_VEC_LEN:  vec_len          <= mmio_wdata;
          R_LR:       lr               <= mmio_wdata;
          R_MLP_LO:   mlp_addr[31:0]   <= mmio_wdata;
          R_MLP_HI:   mlp_addr[63:32]  <= mmio_wdata;
          R_MLP_SIZE: mlp_size         <= mmio_wdata;
          R_NTABLES:  num_tables       <= mmio_wdata[7:0];
          R_NLOOKUPS: num_lookups      <= mmio_wdata[7:0];
          R_BATCH:    batch_id         <= mmio_wdata;
          R_RED_LO:   red_base[31:0]   <= mmio_wdata;
          R_RED_HI:   red_base[63:32]  <= mmio_wdata;
          R_SF_BANK:  sf_bank_q        <= mmio_wdata[0];
          default: ;
        endcase
      end
      if (mmio_rd) begin
        unique case (mmio_addr)
          R_STATUS:   mmio_rdata <= {24'b0, status};
          R_VEC_LEN:  mmio_rdata <= vec_len;
          R_LR:       mmio_rdata <= lr;
          R_MLP_LO:   mmio_rdata <= mlp_addr[31:0];
          R_MLP_HI:   mmio_rdata <= mlp_addr[63:32];
          R_MLP_SIZE: mmio_rdata <= mlp_size;
          R_NTABLES:  mmio_rdata <= {24'b0, num_tables};
          R_NLOOKUPS: mmio_rdata <= {24'b0, num_lookups};
          R_BATCH:    mmio_rdata <= batch_id;
          R_RED_LO:   mmio_rdata <= red_base[31:0];
          R_RED_HI:   mmio_rdata <= red_base[63:32];
          R_SF_BANK:  mmio_rdata <= {31'b0, sf_bank_q};
          R_EMB_CNT:  mmio_rdata <= emb_cnt;
          R_MLP_CNT:  mmio_rdata <= mlp_cnt;
          default:    mmio_rdata <= '0;
        endcase
      end
    end
  end
endmodule
