// compute_logic: CXL-MEM's near-memory embedding engine.
//
// Three commands, each over all tables t < num_tables of the model, with the
// indices of one batch taken from the sparse feature buffer (bank = batch
// parity) and every vector handled line by line (16 lanes per line, one adder
// and one multiplier per lane):
//
//   OP_LOOKUP  (bank b):  reduced[t] = sum_j E[t][idx_b[t][j]]
//              sum pooling, written to the reduced-embedding scratchpad; then
//              flush_req asks the DCOH to evict the lines to CXL-GPU.
//   OP_UPDATE  (bank b):  for every j: E[t][idx_b[t][j]] -= lr * grad[t]
//              read-modify-write in PMEM, one occurrence at a time, so an index
//              that appears twice is updated twice.
//   OP_CORRECT (bank n = next batch, bank2 c = current batch):
//              reduced[t] -= m_t * (lr * grad[t]),
//              m_t = number of pairs (j,k) with idx_n[t][j] == idx_c[t][k].
//
// OP_CORRECT is the paper's relaxed embedding lookup: the lookup of batch N+1
// is run early on batch N's table (before batch N's update) and, once batch
// N's gradient is known, the reduced vector is corrected using the
// commutativity of addition. The early lookup is issued with cmd_defer set, so
// its uncorrected result is not flushed to CXL-GPU. Because lr*grad is rounded exactly as in
// OP_UPDATE and all sums wrap modulo 2^32, the corrected result is bit-equal to
// a lookup made after the update. flush_req is pulsed after OP_CORRECT too.
//
// Number format: signed Q16.16, lr*g = (64-bit product) >>> 16, low 32 bits.
// The gradient of table t (one line set per table, as flushed by CXL-GPU)
// applies to every index of that table in the batch. Lookup/update/relaxation
// follow the paper; the number format, gradient granularity, loop order and
// one-request-at-a-time memory access are this design's choices.
//
// Interface: cmd_valid is taken when busy is low; done pulses for one cycle at
// the end. Memory master: mem_valid/mem_ready, then one mem_rsp_valid pulse per
// request (writes too). Scratchpad and sparse-feature reads are synchronous.
module compute_logic
  import trainingcxl_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             cmd_valid,
  input  comp_op_e         cmd_op,
  input  logic             cmd_bank,
  input  logic             cmd_bank2,
  input  logic             cmd_defer,   // OP_LOOKUP: no DCOH flush (early relaxed lookup)
  output logic             busy,
  output logic             done,
  output logic             flush_req,
  // configuration (MMIO)
  input  logic [31:0]      vec_len,
  input  logic [31:0]      lr,
  input  logic [7:0]       num_tables,
  input  logic [7:0]       num_lookups,
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
  // reduced-embedding scratchpad
  output logic             red_we,
  output logic [SPL_W-1:0] red_waddr,
  output line_t            red_wdata,
  output logic [SPL_W-1:0] red_raddr,
  input  line_t            red_rdata,
  // gradient scratchpad
  output logic [SPL_W-1:0] grad_raddr,
  input  line_t            grad_rdata,
  // last relaxed-lookup match count (for observation)
  output logic [15:0]      last_matches
);
  typedef enum logic [3:0] {
    S_IDLE, S_SF, S_SFW, S_MRD, S_MRDW, S_MWR, S_MWRW, S_RWR,
    S_CJ, S_CJW, S_CK, S_CRD, S_CRDW, S_DONE
  } state_e;
  state_e   state;
  comp_op_e op;
  logic     bank, bank2, defer;
  logic [7:0]        t, j, k;
  logic [VL_BITS:0]  l;
  logic [VL_BITS:0]  vl;        // lines per vector
  logic [IDX_W-1:0]  idx_q, a_q;
  line_t             acc, gq, newl;
  logic [15:0]       m;
  logic              cmp_v;

  // lane arithmetic
  function automatic logic [ELEM_W-1:0] scaled(input logic [ELEM_W-1:0] rate,
                                                input logic [ELEM_W-1:0] g);
    logic signed [2*ELEM_W-1:0] p;
    p = $signed(rate) * $signed(g);
    return ELEM_W'(p >>> FRAC_W);
  endfunction

  function automatic line_t line_add(input line_t x, input line_t y);
    line_t r;
    for (int i = 0; i < LANES; i++)
      r[i*ELEM_W +: ELEM_W] = x[i*ELEM_W +: ELEM_W] + y[i*ELEM_W +: ELEM_W];
    return r;
  endfunction

  // x - mult * (lr * g), lane-wise
  function automatic line_t line_sub_scaled(input line_t x, input line_t g,
                                            input logic [ELEM_W-1:0] rate,
                                            input logic [15:0] mult);
    line_t r;
    for (int i = 0; i < LANES; i++)
      r[i*ELEM_W +: ELEM_W] = x[i*ELEM_W +: ELEM_W] -
          ELEM_W'(scaled(rate, g[i*ELEM_W +: ELEM_W]) * {16'b0, mult});
    return r;
  endfunction

  logic [SPL_W-1:0] sp_line;
  assign sp_line = SPL_W'(int'(t) * VL_MAX + int'(l));

  assign busy       = (state != S_IDLE);
  assign sf_entry   = ENT_W'(int'(t) * MAX_LOOKUPS + ((state == S_CK) ? int'(k) : int'(j)));
  assign sf_bank    = (state == S_CK) ? bank2 : bank;
  assign red_raddr  = sp_line;
  assign grad_raddr = sp_line;
  assign newl       = line_sub_scaled(mem_rsp_data, gq, lr, 16'd1);

  always_comb begin
    mem_valid = (state == S_MRD) || (state == S_MWR);
    mem_req.we    = (state == S_MWR);
    mem_req.addr  = data_addr(t[TBL_BITS-1:0], idx_q, l[VL_BITS-1:0]);
    mem_req.wdata = acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; op <= OP_LOOKUP; bank <= 1'b0; bank2 <= 1'b0; defer <= 1'b0;
      t <= '0; j <= '0; k <= '0; l <= '0; vl <= '0;
      idx_q <= '0; a_q <= '0; acc <= '0; gq <= '0; m <= '0; cmp_v <= 1'b0;
      done <= 1'b0; flush_req <= 1'b0; red_we <= 1'b0; red_wdata <= '0; red_waddr <= '0;
      last_matches <= '0;
    end else begin
      done      <= 1'b0;
      flush_req <= 1'b0;
      red_we    <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          op <= cmd_op; bank <= cmd_bank; bank2 <= cmd_bank2; defer <= cmd_defer;
          t <= '0; j <= '0; k <= '0; l <= '0; acc <= '0; m <= '0;
          vl <= (vec_len > 32'(LANES)) ? (VL_BITS+1)'(VL_MAX) : (VL_BITS+1)'(1);
          if (num_tables == 0 || num_lookups == 0) state <= S_DONE;
          else state <= (cmd_op == OP_CORRECT) ? S_CJ : S_SF;
        end
        // ---- lookup / update: fetch index j of table t --------------------
        S_SF:  state <= S_SFW;
        S_SFW: begin idx_q <= sf_data; gq <= grad_rdata; state <= S_MRD; end
        S_MRD: if (mem_ready) state <= S_MRDW;
        S_MRDW: if (mem_rsp_valid) begin
          if (op == OP_LOOKUP) begin
            acc <= line_add(acc, mem_rsp_data);
            if (j + 1 < num_lookups) begin j <= j + 1'b1; state <= S_SF; end
            else state <= S_RWR;
          end else begin
            acc   <= newl;            // updated embedding line
            state <= S_MWR;
          end
        end
        S_MWR:  if (mem_ready) state <= S_MWRW;
        S_MWRW: if (mem_rsp_valid) begin
          // update loop order: t, j, l
          if (l + 1 < vl) begin l <= l + 1'b1; state <= S_SF; end
          else begin
            l <= '0;
            if (j + 1 < num_lookups) begin j <= j + 1'b1; state <= S_SF; end
            else begin
              j <= '0;
              if (t + 1 < num_tables) begin t <= t + 1'b1; state <= S_SF; end
              else state <= S_DONE;
            end
          end
        end
        // lookup: write reduced line; loop order t, l, j
        S_RWR: begin
          red_we <= 1'b1; red_waddr <= sp_line; red_wdata <= acc; acc <= '0; j <= '0;
          if (l + 1 < vl) begin l <= l + 1'b1; state <= S_SF; end
          else begin
            l <= '0;
            if (t + 1 < num_tables) begin t <= t + 1'b1; state <= S_SF; end
            else state <= S_DONE;
          end
        end
        // ---- relaxed-lookup correction ------------------------------------
        S_CJ:  state <= S_CJW;
        S_CJW: begin a_q <= sf_data; k <= '0; cmp_v <= 1'b0; state <= S_CK; end
        S_CK: begin
          // address of entry k presented now, data of entry k-1 compared now
          if (cmp_v && sf_data == a_q) m <= m + 1'b1;
          if (k < num_lookups) begin k <= k + 1'b1; cmp_v <= 1'b1; end
          else begin
            cmp_v <= 1'b0;
            if (j + 1 < num_lookups) begin j <= j + 1'b1; state <= S_CJ; end
            else begin l <= '0; state <= S_CRD; end
          end
        end
        S_CRD:  state <= S_CRDW;
        S_CRDW: begin
          red_we    <= 1'b1;
          red_waddr <= sp_line;
          red_wdata <= line_sub_scaled(red_rdata, grad_rdata, lr, m);
          last_matches <= m;
          if (l + 1 < vl) begin l <= l + 1'b1; state <= S_CRD; end
          else begin
            l <= '0; j <= '0; m <= '0;
            if (t + 1 < num_tables) begin t <= t + 1'b1; state <= S_CJ; end
            else state <= S_DONE;
          end
        end
        S_DONE: begin
          done      <= 1'b1;
          flush_req <= (op == OP_CORRECT) || (op == OP_LOOKUP && !defer);
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
