// scratchpad: on-chip line RAM of the computing logic.
//
// The CXL-MEM computing logic keeps its interim embedding vectors in a
// scratchpad. This design uses two instances: one holds the reduced embedding
// vectors (one per table, VL_MAX lines each), the other the embedding
// gradients that CXL-GPU flushes into CXL-MEM. Each has one write port and two
// independent read ports. Reads are synchronous: the data of the address
// presented in cycle n is on rd*_data in cycle n+1. A read of the line being
// written in the same cycle returns the old contents. Contents are cleared by
// reset so that nothing uninitialised is ever read. The size (80 tables x 2
// lines) follows the largest model the paper evaluates; the port structure is
// this design's own.
module scratchpad
  import trainingcxl_pkg::*;
#(
  parameter int DEPTH = MAX_TABLES * VL_MAX,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  line_t         wr_data,
  input  logic [AW-1:0] rda_addr,
  output line_t         rda_data,
  input  logic [AW-1:0] rdb_addr,
  output line_t         rdb_data
);
  line_t mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
      rda_data <= '0;
      rdb_data <= '0;
    end else begin
      if (wr_en && int'(wr_addr) < DEPTH) mem[wr_addr] <= wr_data;
      rda_data <= (int'(rda_addr) < DEPTH) ? mem[rda_addr] : '0;
      rdb_data <= (int'(rdb_addr) < DEPTH) ? mem[rdb_addr] : '0;
    end
  end
endmodule
