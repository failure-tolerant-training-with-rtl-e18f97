// dcoh: CXL-MEM's device coherency engine for the reduced-embedding lines.
//
// The reduced embedding vectors that the computing logic produces are homed in
// CXL-GPU's memory and cached in CXL-MEM's scratchpad. The DCOH keeps a state
// per scratchpad line: a line becomes Modified when the computing logic writes
// it (mark_valid/mark_line) and Invalid once evicted. On flush_start it walks
// all NLINES lines in order and, for every Modified line, reads it from the
// scratchpad (synchronous read port, one cycle) and issues a CXL.cache
// write-back (D2H write) to host address red_base + 64*line. It waits for the
// write's completion (wb_ack) before moving on, then marks the line Invalid.
// This moves the lookup result to CXL-GPU without any software copy, as the
// paper describes. Only the Modified/Invalid subset of the CXL states is kept,
// since these lines are only ever written by CXL-MEM; that, and the line walk
// order, are this design's choices. A line re-marked while it is being
// evicted stays Modified and is sent by the next flush.
//
// Handshake: wb_valid/wb_ready, request held stable while wb_valid && !wb_ready
// (asserted); wb_ack one pulse per accepted write. busy is high from
// flush_start to the end of the walk; evicted counts evictions.
module dcoh
  import trainingcxl_pkg::*;
#(
  parameter int NLINES = MAX_TABLES * VL_MAX,
  parameter int AW     = $clog2(NLINES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          mark_valid,
  input  logic [AW-1:0] mark_line,
  input  logic          flush_start,
  input  haddr_t        red_base,
  output logic [AW-1:0] rd_addr,
  input  line_t         rd_data,
  output logic          wb_valid,
  input  logic          wb_ready,
  output haddr_t        wb_addr,
  output line_t         wb_data,
  input  logic          wb_ack,
  output logic          busy,
  output logic [31:0]   evicted
);
  typedef enum logic [0:0] { LS_I = 1'b0, LS_M = 1'b1 } lstate_e;
  typedef enum logic [2:0] { S_IDLE, S_SCAN, S_RD, S_REQ, S_ACK } state_e;

  lstate_e       ls [NLINES];
  state_e        state;
  logic [AW-1:0] ptr;
  logic          remark;

  assign busy    = (state != S_IDLE);
  assign rd_addr = ptr;
  assign wb_valid = (state == S_REQ);
  assign wb_addr  = red_base + {{(64-AW-6){1'b0}}, ptr, 6'b0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NLINES; i++) ls[i] <= LS_I;
      state <= S_IDLE; ptr <= '0; wb_data <= '0; evicted <= '0; remark <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (flush_start) begin ptr <= '0; state <= S_SCAN; end
        S_SCAN: begin
          if (ls[ptr] == LS_M) begin
            state <= S_RD; remark <= 1'b0;
          end
          else if (int'(ptr) == NLINES - 1) state <= S_IDLE;
          else ptr <= ptr + 1'b1;
        end
        S_RD:  begin wb_data <= rd_data; state <= S_REQ; end
        S_REQ: if (wb_ready) state <= S_ACK;
        S_ACK: if (wb_ack) begin
          evicted <= evicted + 1'b1;
          if (int'(ptr) == NLINES - 1) state <= S_IDLE;
          else begin ptr <= ptr + 1'b1; state <= S_SCAN; end
        end
        default: state <= S_IDLE;
      endcase
      // the current line becomes Invalid when its write-back completes,
      // unless the computing logic wrote it again meanwhile
      if (state == S_ACK && wb_ack && !remark && !(mark_valid && mark_line == ptr))
        ls[ptr] <= LS_I;
      if (mark_valid && int'(mark_line) < NLINES) begin
        ls[mark_line] <= LS_M;
        if (state inside {S_SCAN, S_RD, S_REQ, S_ACK} && mark_line == ptr) remark <= 1'b1;
      end
    end
  end

  // a write-back request is held until accepted
  logic   wb_hold;
  haddr_t wb_addr_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin wb_hold <= 1'b0; wb_addr_q <= '0; end
    else begin
      wb_hold   <= wb_valid && !wb_ready;
      wb_addr_q <= wb_addr;
      if (wb_hold) assert (wb_valid && wb_addr == wb_addr_q)
        else $error("dcoh: write-back request changed before it was accepted");
    end
  end
endmodule
