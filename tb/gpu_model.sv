// gpu_model: behavioural model of CXL-GPU's side of the CXL.cache channel.
// It accepts every device-to-host request at once. Write-backs (id 0) are
// stored in a sparse array and acknowledged LAT cycles later. Reads (id 1)
// return tb_util_pkg::gpu_line(address), but only while `window` is high,
// which stands for CXL-GPU running feature interaction and top-MLP; a read
// arriving outside the window waits for the next one.
module gpu_model
  import trainingcxl_pkg::*;
  import tb_util_pkg::*;
#(
  parameter int LAT = 3
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     window,
  input  logic     d2h_valid,
  output logic     d2h_ready,
  input  d2h_req_t d2h_req,
  output logic     h2d_valid,
  output h2d_rsp_t h2d_rsp
);
  line_t  wmem [haddr_t];
  int     wb_cnt, rd_cnt, rd_held;
  logic   wpend, rpend;
  int     wcnt, rcnt;
  haddr_t raddr;

  assign d2h_ready = 1'b1;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wpend <= 0; rpend <= 0; wcnt <= 0; rcnt <= 0; raddr <= '0;
      h2d_valid <= 0; h2d_rsp <= '0; wb_cnt <= 0; rd_cnt <= 0; rd_held <= 0;
    end else begin
      h2d_valid <= 0;
      if (d2h_valid && d2h_req.op == D2H_WR) begin
        wmem[d2h_req.addr] = d2h_req.wdata; wpend <= 1; wcnt <= LAT; wb_cnt <= wb_cnt + 1;
      end
      if (d2h_valid && d2h_req.op == D2H_RD) begin
        rpend <= 1; rcnt <= LAT; raddr <= d2h_req.addr;
      end
      if (wpend && !(d2h_valid && d2h_req.op == D2H_WR)) begin
        if (wcnt > 1) wcnt <= wcnt - 1;
        else begin wpend <= 0; h2d_valid <= 1; h2d_rsp.id <= 1'b0; h2d_rsp.rdata <= '0; end
      end else if (rpend && !(d2h_valid && d2h_req.op == D2H_RD)) begin
        if (!window) rd_held <= rd_held + 1;
        else if (rcnt > 1) rcnt <= rcnt - 1;
        else begin
          rpend <= 0; h2d_valid <= 1; h2d_rsp.id <= 1'b1; h2d_rsp.rdata <= gpu_line(raddr);
          rd_cnt <= rd_cnt + 1;
        end
      end
    end
  end
endmodule
