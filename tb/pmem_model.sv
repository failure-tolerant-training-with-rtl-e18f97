// pmem_model: behavioural model of one PMEM channel's media (not synthesizable
// as written: a sparse associative array). A line never written reads as
// tb_util_pkg::init_line(address). Reads are synchronous: rdata is valid the
// cycle after re. Timing of the persistent medium is produced by pmem_mc, as
// in a DRAM-based emulation; this model only stores data.
module pmem_model
  import trainingcxl_pkg::*;
  import tb_util_pkg::*;
(
  input  logic   clk,
  input  logic   re,
  input  logic   we,
  input  laddr_t addr,
  input  line_t  wdata,
  output line_t  rdata
);
  line_t mem [laddr_t];

  function automatic line_t peek(input laddr_t a);
    return mem.exists(a) ? mem[a] : init_line(a);
  endfunction

  always @(posedge clk) begin
    if (re) rdata <= peek(addr);
    if (we) mem[addr] = wdata;
  end
endmodule
