// tb_window_5x5: feeds the columns of a 9 x 8 test image in raster order and
// checks that each valid window equals the 5x5 block of the image centred on
// (cx, cy), that the centre coordinates are q-2, p-2, and that exactly
// (W-4) x (H-4) windows are flagged valid (none touching the border).
module tb_window_5x5;
  import centroid_pkg::*;
  localparam int W = 9, H = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  pix_t [WIN-1:0] column;
  logic [X_W-1:0] col = 0;
  logic [Y_W-1:0] row = 0;
  logic win_valid;
  window_t win;
  logic [X_W-1:0] cx;
  logic [Y_W-1:0] cy;
  int checks = 0, failures = 0, nwin = 0;

  window_5x5 dut (.*);

  always #5 clk = ~clk;

  function automatic pix_t img(int r, int c);
    return (r < 0) ? pix_t'(1000) : pix_t'(r * 37 + c * 5 + 1);
  endfunction

  always @(posedge clk) if (rst_n && win_valid) begin
    nwin++;
    checks++;
    if (cx < 2 || cx > W - 3 || cy < 2 || cy > H - 3) begin
      failures++; $display("FAIL centre %0d,%0d", cx, cy);
    end
    for (int i = 0; i < WIN; i++)
      for (int j = 0; j < WIN; j++) begin
        checks++;
        if (win[i][j] != img(int'(cy) + i - 2, int'(cx) + j - 2)) begin
          failures++; $display("FAIL win[%0d][%0d] at %0d,%0d", i, j, cx, cy);
        end
      end
  end

  initial begin
    column = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < H; r++) begin
      for (int c = 0; c < W; c++) begin
        in_valid = 1; col = X_W'(c); row = Y_W'(r);
        for (int k = 0; k < WIN; k++) column[k] = img(r - (WIN - 1 - k), c);
        @(negedge clk);
        in_valid = 0;
        if ($urandom_range(0, 2) == 0) @(negedge clk);
      end
      repeat (2) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (nwin != (W - 4) * (H - 4)) begin failures++; $display("FAIL nwin %0d", nwin); end
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
