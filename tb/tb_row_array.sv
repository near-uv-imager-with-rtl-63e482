// tb_row_array: streams three 8 x 7 frames (with random idle clocks between
// pixels) through the five-row array and checks that every output column
// holds the pixels of the current row and of the four rows above it at the
// same column, as far as those rows exist in the frame.
module tb_row_array;
  import centroid_pkg::*;
  localparam int W = 8, H = 7;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  pix_t pix = 0;
  logic [X_W-1:0] col = 0;
  logic [Y_W-1:0] row = 0;
  logic out_valid;
  pix_t [WIN-1:0] column;
  logic [X_W-1:0] out_col;
  logic [Y_W-1:0] out_row;
  int checks = 0, failures = 0, ncols = 0;
  int cur_frame = 0;

  row_array #(.IMG_W(W)) dut (.*);

  always #5 clk = ~clk;

  function automatic pix_t value(int f, int r, int c);
    return pix_t'(f * 211 + r * 13 + c * 3 + 7);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    ncols++;
    for (int k = 0; k < WIN; k++) begin
      int r;
      r = int'(out_row) - (WIN - 1 - k);
      if (r >= 0) begin
        checks++;
        if (column[k] != value(cur_frame, r, int'(out_col))) begin
          failures++;
          $display("FAIL r%0d c%0d k%0d got %0d exp %0d", out_row, out_col, k, column[k],
                   value(cur_frame, r, int'(out_col)));
        end
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      cur_frame = f;
      for (int r = 0; r < H; r++) begin
        for (int c = 0; c < W; c++) begin
          in_valid = 1; pix = value(f, r, c); col = X_W'(c); row = Y_W'(r);
          @(negedge clk);
          in_valid = 0;
          if ($urandom_range(0, 3) == 0) @(negedge clk);
        end
        repeat (2) @(negedge clk);
      end
      repeat (3) @(negedge clk);
    end
    checks++;
    if (ncols != 3 * W * H) begin failures++; $display("FAIL ncols %0d", ncols); end
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
