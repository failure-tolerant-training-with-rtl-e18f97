// tb_scratchpad: writes random lines, reads them back on both ports and checks
// the one-cycle read latency, the reset-to-zero contents and that a read in
// the cycle of a write to the same line returns the old value.
module tb_scratchpad;
  import trainingcxl_pkg::*;
  localparam int DEPTH = 160, AW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [AW-1:0] wr_addr = '0, rda_addr = '0, rdb_addr = '0;
  line_t wr_data = '0, rda_data, rdb_data;
  line_t ref_m [DEPTH];
  int checks = 0, failures = 0;
  scratchpad dut (.*);
  function automatic line_t rnd();
    line_t r; for (int i = 0; i < 16; i++) r[i*32 +: 32] = $urandom; return r;
  endfunction
  initial begin
    for (int i = 0; i < DEPTH; i++) ref_m[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    rda_addr = 8'd5; @(negedge clk);
    checks++; if (rda_data != '0) failures++;
    for (int i = 0; i < DEPTH; i++) begin
      wr_en = 1; wr_addr = AW'(i); wr_data = rnd(); ref_m[i] = wr_data; @(negedge clk);
    end
    wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      int a = $urandom_range(0, DEPTH - 1), b = $urandom_range(0, DEPTH - 1);
      rda_addr = AW'(a); rdb_addr = AW'(b); @(negedge clk);
      checks += 2;
      if (rda_data != ref_m[a]) failures++;
      if (rdb_data != ref_m[b]) failures++;
    end
    // read during write to the same line: old data
    wr_en = 1; wr_addr = 8'd7; wr_data = rnd(); rda_addr = 8'd7; @(negedge clk);
    checks++; if (rda_data != ref_m[7]) failures++;
    ref_m[7] = wr_data; wr_en = 0; @(negedge clk);
    checks++; if (rda_data != ref_m[7]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
