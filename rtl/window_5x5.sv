// window_5x5: sliding 5x5 window over the pixel stream.
//
// Each clock a 5-pixel column from row_array (rows p-4..p at column q) is
// shifted in from the right, so the register array holds columns q-4..q of
// rows p-4..p: a 5x5 window centred on pixel (q-2, p-2). The window is
// flagged valid only when it lies wholly inside the current frame and row,
// i.e. when q >= 4 and p >= 4. Centres within two pixels of the frame edge
// are therefore never evaluated, which is this design's choice.
//
// Interface: win[r][c], r = 0 top row (p-4), c = 0 left column (q-4); the
// centre is win[2][2] with coordinates cx = q-2, cy = p-2.
// Timing: one column per clock, window registered, one clock latency.
module window_5x5
  import centroid_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  pix_t [WIN-1:0]  column,
  input  logic [X_W-1:0]  col,
  input  logic [Y_W-1:0]  row,
  output logic            win_valid,
  output window_t         win,
  output logic [X_W-1:0]  cx,
  output logic [Y_W-1:0]  cy
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      win       <= '0;
      win_valid <= 1'b0;
      cx        <= '0;
      cy        <= '0;
    end else begin
      win_valid <= 1'b0;
      if (in_valid) begin
        for (int r = 0; r < WIN; r++) begin
          for (int c = 0; c < WIN-1; c++) win[r][c] <= win[r][c+1];
          win[r][WIN-1] <= column[r];
        end
        win_valid <= (col >= X_W'(WIN-1)) && (row >= Y_W'(WIN-1));
        cx        <= col - X_W'(WIN/2);
        cy        <= row - Y_W'(WIN/2);
      end
    end
  end

endmodule
