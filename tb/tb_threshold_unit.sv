// tb_threshold_unit: 8 x 4 frames. In programmed mode the threshold must
// equal thr_prog. In dynamic mode, after each frame the threshold must
// become floor(frame sum / pixel count) + offset within ACC_W + 3 clocks
// of the frame end, saturating at 1023; before the first frame is measured
// the programmed value applies.
module tb_threshold_unit;
  import centroid_pkg::*;
  localparam int W = 8, H = 4;
  localparam int ACC_W = $clog2(W * H + 1) + PIX_W;

  logic clk = 0, rst_n = 0;
  logic pix_valid = 0, frame_start = 0, frame_end = 0, thr_mode = 1;
  pix_t pix = 0, thr_prog = 77, thr_offset = 3;
  pix_t threshold, mean;
  logic mean_valid;
  int checks = 0, failures = 0;

  threshold_unit #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;

  task automatic frame(input int base, input int spread, output int exp_mean);
    int s;
    s = 0;
    frame_start = 1; @(negedge clk); frame_start = 0;
    for (int i = 0; i < W * H; i++) begin
      pix_valid = 1;
      pix = pix_t'(base + $urandom_range(0, spread));
      s += int'(pix);
      @(negedge clk);
      pix_valid = 0;
      if (i % 5 == 0) @(negedge clk);
    end
    exp_mean = s / (W * H);
    frame_end = 1; @(negedge clk); frame_end = 0;
  endtask

  task automatic expect_thr(input int exp_thr, input int max_wait);
    int n;
    n = 0;
    while (threshold != pix_t'(exp_thr) && n < max_wait) begin @(negedge clk); n++; end
    checks++;
    if (threshold != pix_t'(exp_thr)) begin
      failures++; $display("FAIL threshold %0d exp %0d", threshold, exp_thr);
    end
  endtask

  initial begin
    int m;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (threshold != 77) begin failures++; $display("FAIL initial threshold %0d", threshold); end
    frame(10, 20, m);
    expect_thr(m + 3, ACC_W + 3);
    checks++;
    if (mean != pix_t'(m)) begin failures++; $display("FAIL mean %0d exp %0d", mean, m); end
    frame(300, 400, m);
    // threshold still from the previous frame until this one is measured
    checks++;
    if (threshold == pix_t'(m + 3)) begin failures++; $display("FAIL threshold changed too early"); end
    expect_thr(m + 3, ACC_W + 3);
    thr_offset = 500;
    frame(900, 100, m);
    expect_thr(1023, ACC_W + 3);
    thr_mode = 0;
    #1;
    checks++;
    if (threshold != 77) begin failures++; $display("FAIL programmed threshold %0d", threshold); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
