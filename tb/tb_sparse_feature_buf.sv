// tb_sparse_feature_buf: fills both banks with random indices (the largest
// batch shape, 80 tables x 80 lookups), then reads random entries of both banks
// on both ports and checks the data one cycle after the address.
module tb_sparse_feature_buf;
  import trainingcxl_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_bank = 0, rda_bank = 0, rdb_bank = 0;
  logic [ENT_W-1:0] wr_entry = '0, rda_entry = '0, rdb_entry = '0;
  logic [IDX_W-1:0] wr_data = '0, rda_data, rdb_data;
  logic [IDX_W-1:0] ref_m [2][MAX_ENTRIES];
  int checks = 0, failures = 0;
  sparse_feature_buf dut (.*);
  initial begin
    for (int b = 0; b < 2; b++)
      for (int e = 0; e < MAX_ENTRIES; e++) begin
        @(negedge clk); wr_en = 1; wr_bank = b[0]; wr_entry = ENT_W'(e);
        wr_data = $urandom; ref_m[b][e] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      int a = $urandom_range(0, MAX_ENTRIES - 1), c = $urandom_range(0, MAX_ENTRIES - 1);
      bit ba = $urandom_range(0, 1), bb = $urandom_range(0, 1);
      rda_bank = ba; rda_entry = ENT_W'(a); rdb_bank = bb; rdb_entry = ENT_W'(c);
      @(negedge clk);
      checks += 2;
      if (rda_data != ref_m[ba][a]) failures++;
      if (rdb_data != ref_m[bb][c]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
