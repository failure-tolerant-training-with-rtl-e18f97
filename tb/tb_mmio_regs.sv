// tb_mmio_regs: writes every configuration register and reads it back (one
// cycle read latency), checks that the two doorbells pulse for exactly one
// cycle with the decoded fields, that writes to the sparse-feature window reach
// the buffer port with the selected bank and entry, and that status and the
// two log counters are readable.
module tb_mmio_regs;
  import trainingcxl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic mmio_wr = 0, mmio_rd = 0;
  logic [15:0] mmio_addr = '0;
  logic [31:0] mmio_wdata = '0, mmio_rdata;
  logic [31:0] vec_len, lr, mlp_size, batch_id;
  haddr_t mlp_addr, red_base;
  logic [7:0] num_tables, num_lookups;
  logic comp_cmd_valid, comp_cmd_bank, comp_cmd_bank2, comp_cmd_defer;
  comp_op_e comp_cmd_op;
  logic ck_cmd_valid, ck_cmd_bank;
  ck_op_e ck_cmd_op;
  logic sf_wr_en, sf_wr_bank;
  logic [ENT_W-1:0] sf_wr_entry;
  logic [IDX_W-1:0] sf_wr_data;
  logic [7:0] status = 8'hA5;
  logic [31:0] emb_cnt = 32'd1234, mlp_cnt = 32'd99;
  int checks = 0, failures = 0, comp_pulses = 0, ck_pulses = 0, sf_writes = 0;
  mmio_regs dut (.*);

  always @(posedge clk) begin
    if (comp_cmd_valid) comp_pulses++;
    if (ck_cmd_valid) ck_pulses++;
    if (sf_wr_en) begin
      sf_writes++;
      checks++; if (sf_wr_entry != 13'd321 || sf_wr_data != 32'hBEEF || sf_wr_bank != 1'b1) begin failures++; $display("FAIL check 1"); end
    end
  end

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); mmio_wr = 1; mmio_addr = a; mmio_wdata = d; @(negedge clk); mmio_wr = 0;
  endtask
  task automatic rd_check(input logic [15:0] a, input logic [31:0] e);
    @(negedge clk); mmio_rd = 1; mmio_addr = a; @(negedge clk); mmio_rd = 0;
    checks++; if (mmio_rdata != e) begin failures++; $display("FAIL %h: %h vs %h", a, mmio_rdata, e); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    rd_check(R_VEC_LEN, 32);
    wr(R_VEC_LEN, 16);            rd_check(R_VEC_LEN, 16);
    wr(R_LR, 32'h0000_1999);      rd_check(R_LR, 32'h0000_1999);
    wr(R_MLP_LO, 32'h1234_5000);  rd_check(R_MLP_LO, 32'h1234_5000);
    wr(R_MLP_HI, 32'h0000_0007);  rd_check(R_MLP_HI, 32'h7);
    wr(R_MLP_SIZE, 32'd68000000); rd_check(R_MLP_SIZE, 32'd68000000);
    wr(R_NTABLES, 80);            rd_check(R_NTABLES, 80);
    wr(R_NLOOKUPS, 80);           rd_check(R_NLOOKUPS, 80);
    wr(R_BATCH, 17);              rd_check(R_BATCH, 17);
    wr(R_RED_LO, 32'hABC0_0000);  rd_check(R_RED_LO, 32'hABC0_0000);
    wr(R_RED_HI, 32'h2);          rd_check(R_RED_HI, 32'h2);
    checks++; if (mlp_addr != 64'h7_1234_5000 || red_base != 64'h2_ABC0_0000) begin failures++; $display("FAIL check 2"); end
    rd_check(R_STATUS, 32'hA5);
    rd_check(R_EMB_CNT, 1234);
    rd_check(R_MLP_CNT, 99);
    // doorbells
    @(negedge clk); mmio_wr = 1; mmio_addr = R_COMP_CMD; mmio_wdata = 32'h72;
    @(negedge clk); mmio_wr = 0;
    checks++; if (!(comp_cmd_valid && comp_cmd_op == OP_CORRECT && comp_cmd_bank && comp_cmd_bank2 && comp_cmd_defer)) begin failures++; $display("FAIL check 3"); end
    wr(R_CK_CMD, 32'h12);
    @(negedge clk);
    checks++; if (comp_pulses != 1) begin failures++; $display("FAIL check 4"); end
    checks++; if (ck_pulses != 1 || ck_cmd_op != CK_RESTORE || !ck_cmd_bank) begin failures++; $display("FAIL check 5"); end
    // sparse-feature window
    wr(R_SF_BANK, 1);
    wr(R_SF_WIN + 16'(4 * 321), 32'hBEEF);
    checks++; if (sf_writes != 1) begin failures++; $display("FAIL check 6"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
