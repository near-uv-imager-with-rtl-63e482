// tb_centroid_full: the end-to-end sequence of centroid_scenario with the
// readout at its default parameters (1280 x 1024 frames, 4-bit fractions,
// 16-entry event buffer, 2^28-word SDRAM).
module tb_centroid_full;
  import centroid_pkg::*;

  logic clk, rst_n, fv, lv, start, thr_mode;
  pix_t pix_in, thr_prog, thr_offset, threshold, frame_mean;
  mode_e mode;
  logic sdr_req, sdr_we, sdr_ready, sdr_rvalid;
  logic [27:0] sdr_addr, stored;
  logic [WORD_W-1:0] sdr_wdata, sdr_rdata;
  logic tx_valid, tx_ready, tx_last, acquiring;
  logic [7:0] tx_data;
  logic [FRAME_ID_W-1:0] frame_id;
  logic [15:0] event_count, hot_count, multi_count, overflow_count, drop_count;

  centroid_top dut (.*);
  centroid_scenario scn (.*);
endmodule
