// tb_cmos_capture: drives a small sensor bus (8 x 6 frame plus one extra
// pixel per line and one extra line, which must be clipped) for three
// frames with line and frame blanking. Every forwarded pixel must carry the
// value the sensor sent for that (column, row); the pixel count per frame,
// the frame ID sequence and the frame start/end pulses are checked.
module tb_cmos_capture;
  import centroid_pkg::*;
  localparam int W = 8, H = 6;

  logic clk = 0, rst_n = 0;
  logic fv = 0, lv = 0;
  pix_t pix_in = 0;
  logic pix_valid, frame_start, frame_end;
  pix_t pix;
  logic [X_W-1:0] col;
  logic [Y_W-1:0] row;
  logic [FRAME_ID_W-1:0] frame_id;
  int checks = 0, failures = 0;
  int npix = 0, nstart = 0, nend = 0;
  int cur_frame = 0;

  cmos_capture #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;

  function automatic pix_t value(int f, int r, int c);
    return pix_t'(f * 97 + r * 16 + c + 1);
  endfunction

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (frame_start) begin
      nstart++;
      checks++;
      if (npix != 0 && npix != W * H) begin failures++; $display("FAIL npix %0d", npix); end
      npix = 0;
    end
    if (frame_end) nend++;
    if (pix_valid) begin
      npix++;
      checks++;
      if (pix != value(cur_frame, int'(row), int'(col)) || col >= W || row >= H) begin
        failures++;
        $display("FAIL pixel r%0d c%0d = %0d", row, col, pix);
      end
      checks++;
      if (frame_id != FRAME_ID_W'(cur_frame + 1)) begin
        failures++; $display("FAIL frame_id %0d exp %0d", frame_id, cur_frame + 1);
      end
    end
  end

  task automatic send_frame(int f);
    fv = 1;
    repeat (2) @(negedge clk);
    for (int r = 0; r < H + 1; r++) begin
      for (int c = 0; c < W + 1; c++) begin
        lv = 1; pix_in = value(f, r, c);
        @(negedge clk);
      end
      lv = 0; pix_in = '1;
      repeat (3) @(negedge clk);
    end
    fv = 0;
    repeat (6) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int f = 0; f < 3; f++) begin
      cur_frame = f;
      send_frame(f);
    end
    checks++;
    if (npix != W * H) begin failures++; $display("FAIL last npix %0d", npix); end
    checks++;
    if (nstart != 3 || nend != 3) begin failures++; $display("FAIL starts %0d ends %0d", nstart, nend); end
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
