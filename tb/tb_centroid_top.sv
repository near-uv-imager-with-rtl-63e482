// tb_centroid_top: end-to-end test of the readout at a reduced frame size
// (64 x 48 pixels); the sequence and checks are in centroid_scenario.
module tb_centroid_top;
  import centroid_pkg::*;
  localparam int W = 64, H = 48, DEPTH = 16, AW = 28;

  logic clk, rst_n, fv, lv, start, thr_mode;
  pix_t pix_in, thr_prog, thr_offset, threshold, frame_mean;
  mode_e mode;
  logic sdr_req, sdr_we, sdr_ready, sdr_rvalid;
  logic [AW-1:0] sdr_addr, stored;
  logic [WORD_W-1:0] sdr_wdata, sdr_rdata;
  logic tx_valid, tx_ready, tx_last, acquiring;
  logic [7:0] tx_data;
  logic [FRAME_ID_W-1:0] frame_id;
  logic [15:0] event_count, hot_count, multi_count, overflow_count, drop_count;

  centroid_top #(.IMG_W(W), .IMG_H(H), .FIFO_DEPTH(DEPTH), .ADDR_W(AW)) dut (.*);
  centroid_scenario #(.W(W), .H(H), .FIFO_DEPTH(DEPTH), .ADDR_W(AW), .WATCHDOG(2_000_000)) scn (.*);
endmodule
