// pmem_mc: PMEM memory controller with latency emulation.
//
// In the paper's prototype the four memory controllers sit in front of DRAM
// and delay its responses so that it behaves like persistent memory. This
// controller does the same for one channel: it accepts one system-bus request
// at a time, performs it on the media port at once (media read data arrive one
// cycle after med_re), and returns the response after
//   read : BASE_LAT * RD_X cycles  (+ RAW_PENALTY on a read-after-write hit)
//   write: BASE_LAT * WR_X cycles
// counted from the accept cycle to the cycle in which rsp_valid is high. RD_X = 3 and WR_X = 7 are the PMEM/DRAM latency
// ratios the paper lists. The read-after-write (RAW) slowdown the paper
// describes (a read right after a write to the same physical layout) is
// modelled as: a read whose row (address >> RAW_ROW_SHIFT) equals the row of
// the channel's last write, within RAW_WINDOW cycles of that write, pays
// RAW_PENALTY extra cycles and pulses raw_hit. BASE_LAT, RAW_* values and the
// one-request-at-a-time service are this design's choices; bandwidth is not
// modelled separately from latency.
//
// Handshake: req_valid/req_ready; rsp_valid is a one-cycle pulse carrying the
// read data (write responses carry zero) and the tag of the request.
module pmem_mc
  import trainingcxl_pkg::*;
#(
  parameter int BASE_LAT      = 4,
  parameter int RD_X          = 3,
  parameter int WR_X          = 7,
  parameter int RAW_PENALTY   = 28,
  parameter int RAW_WINDOW    = 4096,
  parameter int RAW_ROW_SHIFT = 4,
  parameter int TAG_W         = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  // system bus side
  input  logic             req_valid,
  output logic             req_ready,
  input  mem_req_t         req,
  input  logic [TAG_W-1:0] req_tag,
  output logic             rsp_valid,
  output line_t            rsp_data,
  output logic [TAG_W-1:0] rsp_tag,
  // media side (DRAM standing in for PMEM)
  output logic             med_re,
  output logic             med_we,
  output laddr_t           med_addr,
  output line_t            med_wdata,
  input  line_t            med_rdata,
  // statistics
  output logic             raw_hit
);
  localparam int CW = 16;
  typedef enum logic [1:0] { S_IDLE, S_WAIT, S_RSP } state_e;
  state_e state;
  logic [CW-1:0] cnt;
  logic          is_rd, cap_pending;
  logic [TAG_W-1:0] tag_q;
  line_t         data_q;
  laddr_t        last_wr_addr;
  logic          last_wr_valid;
  logic [CW-1:0] since_wr;

  logic accept, raw;
  assign req_ready = (state == S_IDLE);
  assign accept    = req_valid && req_ready;
  assign raw       = accept && !req.we && last_wr_valid && (since_wr < CW'(RAW_WINDOW)) &&
                     ((req.addr >> RAW_ROW_SHIFT) == (last_wr_addr >> RAW_ROW_SHIFT));

  assign med_re    = accept && !req.we;
  assign med_we    = accept &&  req.we;
  assign med_addr  = req.addr;
  assign med_wdata = req.wdata;
  assign raw_hit   = raw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cnt <= '0; is_rd <= 1'b0; cap_pending <= 1'b0;
      tag_q <= '0; data_q <= '0; last_wr_addr <= '0; last_wr_valid <= 1'b0;
      since_wr <= '0; rsp_valid <= 1'b0; rsp_data <= '0; rsp_tag <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (since_wr != '1) since_wr <= since_wr + 1'b1;
      if (cap_pending) begin data_q <= med_rdata; cap_pending <= 1'b0; end
      unique case (state)
        S_IDLE: if (accept) begin
          tag_q <= req_tag;
          is_rd <= !req.we;
          cap_pending <= !req.we;
          data_q <= '0;
          if (req.we) begin
            cnt <= CW'(BASE_LAT * WR_X - 1);
            last_wr_addr <= req.addr; last_wr_valid <= 1'b1; since_wr <= '0;
          end else begin
            cnt <= CW'(BASE_LAT * RD_X - 1) + (raw ? CW'(RAW_PENALTY) : '0);
          end
          state <= S_WAIT;
        end
        S_WAIT: if (cnt <= CW'(2)) state <= S_RSP; else cnt <= cnt - 1'b1;
        S_RSP: begin
          rsp_valid <= 1'b1;
          rsp_data  <= is_rd ? data_q : '0;
          rsp_tag   <= tag_q;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
