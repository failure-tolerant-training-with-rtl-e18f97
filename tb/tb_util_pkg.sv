// tb_util_pkg: reference arithmetic and initial memory contents shared by the
// testbenches. init_line gives every never-written PMEM line a fixed value
// derived from its address (the testbenches' "embedding tables"); gpu_line
// gives CXL-GPU's memory contents (its MLP parameters). The lane arithmetic
// repeats the device's Q16.16 rules independently of the RTL.
package tb_util_pkg;
  import trainingcxl_pkg::*;

  function automatic line_t init_line(input laddr_t a);
    line_t r;
    for (int i = 0; i < LANES; i++)
      r[i*32 +: 32] = (32'(a) * 32'h9E37_79B1 + 32'(i) * 32'h0001_2345) & 32'h000F_FFFF;
    return r;
  endfunction

  function automatic line_t gpu_line(input haddr_t a);
    line_t r;
    for (int i = 0; i < LANES; i++) r[i*32 +: 32] = 32'(a) ^ (32'(i) << 24) ^ 32'h5A5A_0000;
    return r;
  endfunction

  function automatic line_t grad_line(input int seed);
    line_t r;
    for (int i = 0; i < LANES; i++)
      r[i*32 +: 32] = 32'(seed * 7919 + i * 104729) - 32'h0004_0000;
    return r;
  endfunction

  function automatic logic [31:0] ref_scaled(input logic [31:0] rate, input logic [31:0] g);
    longint p;
    p = longint'($signed(rate)) * longint'($signed(g));
    return 32'(p >>> 16);
  endfunction

  function automatic line_t ref_add(input line_t x, input line_t y);
    line_t r;
    for (int i = 0; i < LANES; i++) r[i*32 +: 32] = x[i*32 +: 32] + y[i*32 +: 32];
    return r;
  endfunction

  function automatic line_t ref_sub(input line_t x, input line_t g, input logic [31:0] rate,
                                    input int mult);
    line_t r;
    for (int i = 0; i < LANES; i++)
      r[i*32 +: 32] = x[i*32 +: 32] - ref_scaled(rate, g[i*32 +: 32]) * 32'(mult);
    return r;
  endfunction

  function automatic laddr_t ref_data_addr(input int t, input int row, input int l);
    return laddr_t'((t << (ROW_BITS + VL_BITS)) | ((row % (1 << ROW_BITS)) << VL_BITS) | l);
  endfunction
endpackage
