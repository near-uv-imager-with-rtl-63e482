// tb_centroid_prototype: the end-to-end sequence of centroid_scenario with
// 1280 x 800 frames (the prototype sensor's size) fed to the readout at its
// default parameters (1280 x 1024). Shows that frames shorter than IMG_H need
// no change: addresses, the dynamic-threshold mean and the frame store follow
// the lines actually received.
module tb_centroid_prototype;
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
  centroid_scenario #(.H(800)) scn (.*);

  // outer watchdog, behind the scenario's own (100 million clocks)
  initial begin
    repeat (120_000_000) @(posedge clk);
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
