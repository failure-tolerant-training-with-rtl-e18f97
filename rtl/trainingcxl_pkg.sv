// trainingcxl_pkg: types and constants shared by the CXL-MEM device.
//
// A CXL-MEM line is one 64-byte CXL cacheline, sixteen 32-bit lanes. Embedding
// elements, gradients and the learning rate are signed Q16.16 fixed point (a
// choice of this design; the paper gives no number format). PMEM is addressed
// in lines: 30 address bits cover 64 GB. The lower half of that space is the
// data region (embedding tables), the upper half the log region (checkpoints),
// following the paper's split of device memory into data and log regions; the
// exact layout below is this design's own.
//
// Data region line address of table t, row r, line l of the vector:
//   {1'b0, t[TBL_BITS-1:0], r[ROW_BITS-1:0], l[VL_BITS-1:0]}
// Log region (line addresses relative to LOG_BASE):
//   0..1  embedding-log slot headers, 2..3 MLP-log slot headers
//   EMB_AREA + s*EMB_SLOT_LINES + e*(VL_MAX+1)     : entry e metadata {table,row}
//   ... + 1 + l                                    : entry e vector line l
//   MLP_AREA + s*MLP_SLOT_LINES + k                : MLP parameter line k
package trainingcxl_pkg;

  localparam int LINE_W   = 512;              // one 64-byte cacheline
  localparam int ELEM_W   = 32;
  localparam int LANES    = LINE_W / ELEM_W;  // 16 lanes per line
  localparam int FRAC_W   = 16;               // Q16.16
  localparam int LADDR_W  = 30;               // 2^30 lines * 64 B = 64 GB

  // Embedding-table geometry limits (largest model of the evaluation)
  localparam int MAX_TABLES  = 80;
  localparam int MAX_LOOKUPS = 80;
  localparam int MAX_DIM     = 32;
  localparam int VL_MAX      = (MAX_DIM + LANES - 1) / LANES;   // 2 lines per vector
  localparam int MAX_ENTRIES = MAX_TABLES * MAX_LOOKUPS;        // 6400 indices/batch

  localparam int TBL_BITS = 7;
  localparam int VL_BITS  = 1;
  localparam int ROW_BITS = LADDR_W - 1 - TBL_BITS - VL_BITS;   // 21

  localparam int IDX_W    = 32;                // sparse-feature index width
  localparam int ENT_W    = $clog2(MAX_ENTRIES);
  localparam int SPL_W    = $clog2(MAX_TABLES * VL_MAX);         // scratchpad line index

  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [63:0]        haddr_t;         // host physical (byte) address

  // Log-region layout
  localparam laddr_t LOG_BASE       = laddr_t'(1) << (LADDR_W - 1);
  localparam int     EMB_SLOT_LINES = MAX_ENTRIES * (VL_MAX + 1);
  localparam laddr_t EMB_AREA       = LOG_BASE + laddr_t'(16);
  localparam laddr_t MLP_AREA       = LOG_BASE + (laddr_t'(1) << (LADDR_W - 2));
  localparam laddr_t MLP_SLOT_LINES = laddr_t'(1) << (LADDR_W - 3);
  localparam logic [31:0] LOG_MAGIC = 32'h434B_5054;   // "CKPT"

  // System-bus request (masters hold one request outstanding at a time)
  typedef struct packed {
    logic   we;
    laddr_t addr;
    line_t  wdata;
  } mem_req_t;

  // Device-to-host CXL.cache request
  typedef enum logic [0:0] { D2H_RD = 1'b0, D2H_WR = 1'b1 } d2h_op_e;
  typedef struct packed {
    d2h_op_e op;
    haddr_t  addr;
    line_t   wdata;
    logic    id;      // 0: DCOH eviction, 1: checkpoint DMA
  } d2h_req_t;
  typedef struct packed {
    logic    id;
    line_t   rdata;
  } h2d_rsp_t;

  // Computing-logic commands
  typedef enum logic [1:0] {
    OP_LOOKUP  = 2'd0,   // reduced[t] = sum_j E[t][idx[t][j]]
    OP_UPDATE  = 2'd1,   // E[t][idx] -= lr * grad[t] for every index of the batch
    OP_CORRECT = 2'd2    // relaxed lookup: reduced[t] -= m_t * lr * grad[t]
  } comp_op_e;

  // Checkpoint commands
  typedef enum logic [1:0] {
    CK_EMB     = 2'd0,   // start embedding log of a batch
    CK_MLP     = 2'd1,   // start a new MLP log
    CK_RESTORE = 2'd2    // undo the data region from an embedding-log slot
  } ck_op_e;

  // MMIO register map (byte offsets, 32-bit registers)
  localparam logic [15:0] R_COMP_CMD  = 16'h0000; // W: [1:0] op, [4] bank, [5] bank2, [6] defer
  localparam logic [15:0] R_CK_CMD    = 16'h0004; // W: [1:0] op, [4] bank/slot
  localparam logic [15:0] R_STATUS    = 16'h0008; // R: see mmio_regs
  localparam logic [15:0] R_VEC_LEN   = 16'h000C; // embedding vector length (elements)
  localparam logic [15:0] R_LR        = 16'h0010; // learning rate, Q16.16
  localparam logic [15:0] R_MLP_LO    = 16'h0014; // MLP parameter address [31:0]
  localparam logic [15:0] R_MLP_HI    = 16'h0018; // MLP parameter address [63:32]
  localparam logic [15:0] R_MLP_SIZE  = 16'h001C; // MLP parameter size in bytes
  localparam logic [15:0] R_NTABLES   = 16'h0020; // tables in this model
  localparam logic [15:0] R_NLOOKUPS  = 16'h0024; // indices per table per batch
  localparam logic [15:0] R_BATCH     = 16'h0028; // batch number for the next log
  localparam logic [15:0] R_RED_LO    = 16'h002C; // GPU address of reduced embeddings
  localparam logic [15:0] R_RED_HI    = 16'h0030;
  localparam logic [15:0] R_SF_BANK   = 16'h0034; // bank written through the SF window
  localparam logic [15:0] R_EMB_CNT   = 16'h0038; // R: embedding-log counter
  localparam logic [15:0] R_MLP_CNT   = 16'h003C; // R: MLP-log counter (lines)
  localparam logic [15:0] R_SF_WIN    = 16'h8000; // W: 0x8000 + 4*entry, sparse feature

  function automatic laddr_t data_addr(input logic [TBL_BITS-1:0] t,
                                       input logic [IDX_W-1:0] row,
                                       input logic [VL_BITS-1:0] l);
    return {1'b0, t, row[ROW_BITS-1:0], l};
  endfunction

endpackage
