// sparse_feature_buf: embedding indices (sparse features) of two batches.
//
// Host software writes the indices of each batch through the MMIO window
// before the batch runs; the paper relies on these being known in advance for
// its batch-aware checkpoint and relaxed lookup. Two banks hold batch N and
// batch N+1, selected by one bank bit. Entry e = t*MAX_LOOKUPS + j is index j
// of table t. One write port (MMIO) and two synchronous read ports (port A:
// computing logic, port B: checkpointing logic); data appears one cycle after
// the address. The paper draws a sparse-feature box in both logics; sharing one
// two-port buffer between them is this design's choice.
module sparse_feature_buf
  import trainingcxl_pkg::*;
#(
  parameter int ENTRIES = MAX_ENTRIES
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic             wr_bank,
  input  logic [ENT_W-1:0] wr_entry,
  input  logic [IDX_W-1:0] wr_data,
  input  logic             rda_bank,
  input  logic [ENT_W-1:0] rda_entry,
  output logic [IDX_W-1:0] rda_data,
  input  logic             rdb_bank,
  input  logic [ENT_W-1:0] rdb_entry,
  output logic [IDX_W-1:0] rdb_data
);
  logic [IDX_W-1:0] mem [2*ENTRIES];

  function automatic int flat(input logic bank, input logic [ENT_W-1:0] e);
    return (bank ? ENTRIES : 0) + int'(e);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_entry) < ENTRIES) mem[flat(wr_bank, wr_entry)] <= wr_data;
    rda_data <= (int'(rda_entry) < ENTRIES) ? mem[flat(rda_bank, rda_entry)] : '0;
    rdb_data <= (int'(rdb_entry) < ENTRIES) ? mem[flat(rdb_bank, rdb_entry)] : '0;
  end
endmodule
