// tb_dcoh: marks a random subset of the 160 reduced-embedding lines Modified,
// starts a flush and checks that exactly those lines are written back, in
// ascending line order, each to red_base + 64*line with the scratchpad
// contents, one write outstanding at a time; that a second flush with nothing
// marked writes nothing; and that the request is held under back-pressure.
module tb_dcoh;
  import trainingcxl_pkg::*;
  localparam int N = 160, AW = 8;
  localparam haddr_t BASE = 64'h0000_0040_0000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic mark_valid = 0, flush_start = 0, wb_valid, wb_ready = 0, wb_ack = 0, busy;
  logic [AW-1:0] mark_line = '0, rd_addr;
  haddr_t red_base = BASE, wb_addr;
  line_t rd_data, wb_data;
  logic [31:0] evicted;
  int checks = 0, failures = 0;
  bit marked [N];
  int got [$];
  dcoh dut (.*);

  function automatic line_t content(input int a);
    return {16{32'(a) * 32'h0101_0101 + 32'h77}};
  endfunction
  always_ff @(posedge clk) rd_data <= content(int'(rd_addr));   // scratchpad stand-in

  // host side: random back-pressure, ack 2 cycles after acceptance
  int outstanding = 0;
  always @(posedge clk) begin
    wb_ack <= 0;
    if (wb_valid && wb_ready) begin
      automatic int line = int'((wb_addr - BASE) >> 6);
      got.push_back(line);
      checks++; if (wb_data != content(line) || wb_addr[5:0] != 0) begin failures++; if (failures < 4) $display("FAIL line %0d data %h exp %h", line, wb_data[31:0], content(line)[31:0]); end
      checks++; if (outstanding != 0) failures++;
      outstanding = 1;
      fork begin repeat (2) @(posedge clk); wb_ack <= 1; outstanding = 0; end join_none
    end
    wb_ready <= ($urandom_range(0, 2) != 0);
  end

  initial begin
    int n_exp = 0, prev = -1;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) marked[i] = ($urandom_range(0, 3) == 0);
    for (int i = 0; i < N; i++) if (marked[i]) begin
      @(negedge clk); mark_valid = 1; mark_line = AW'(i); n_exp++;
    end
    @(negedge clk); mark_valid = 0; flush_start = 1;
    @(negedge clk); flush_start = 0;
    checks++; if (!busy) failures++;
    while (busy) @(negedge clk);
    checks++; if (got.size() != n_exp) begin failures++; $display("FAIL %0d vs %0d", got.size(), n_exp); end
    foreach (got[k]) begin
      checks++; if (!marked[got[k]] || got[k] <= prev) failures++;
      prev = got[k];
    end
    checks++; if (evicted != 32'(n_exp)) failures++;
    got.delete();
    @(negedge clk); flush_start = 1; @(negedge clk); flush_start = 0;
    while (busy) @(negedge clk);
    checks++; if (got.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
