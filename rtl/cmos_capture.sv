// cmos_capture: front end between the CMOS sensor bus and the centroiding
// pipeline.
//
// The sensor presents a frame-valid (fv), a line-valid (lv) and a 10-bit
// pixel every clock. The inputs are registered once, then the edges of fv
// and lv are found: a rising fv starts a frame (the frame ID is incremented
// and the addresses are reset), a rising lv starts a new row, and every clock
// with fv and lv high is one pixel. Each pixel leaves with its column address
// q (position in the line) and row address p (line in the frame). Pixels
// outside IMG_W x IMG_H are not forwarded.
//
// Timing: pixel, addresses and strobes appear two clocks after the sensor
// bus. frame_start is a one-clock pulse on the clock after fv rises (before
// the first pixel); frame_end a one-clock pulse after fv falls. The first
// frame after reset has frame ID 1.
//
// The edge-triggered reading of the frame-valid / line-valid decisions, the
// pixel clock being the FPGA clock, and the reset values are this design's
// choices; the counters and frame ID follow the centroiding flowchart.
module cmos_capture
  import centroid_pkg::*;
#(
  parameter int IMG_W = 1280,
  parameter int IMG_H = 1024
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // sensor bus
  input  logic                  fv,
  input  logic                  lv,
  input  pix_t                  pix_in,
  // pixel stream
  output logic                  pix_valid,
  output pix_t                  pix,
  output logic [X_W-1:0]        col,
  output logic [Y_W-1:0]        row,
  output logic                  frame_start,
  output logic                  frame_end,
  output logic [FRAME_ID_W-1:0] frame_id
);

  logic fv_q, lv_q, fv_d, lv_d;
  pix_t pix_q;
  logic first_line;
  logic [X_W:0] col_cnt;   // one bit wider so a long line cannot wrap
  logic [Y_W:0] row_cnt;
  logic [X_W:0] col_nxt;
  logic [Y_W:0] row_nxt;

  always_comb begin
    col_nxt = col_cnt;
    row_nxt = row_cnt;
    if (!lv_d) begin
      col_nxt = '0;
      row_nxt = (first_line || (fv_q && !fv_d)) ? '0 : row_cnt + 1'b1;
    end else if (col_cnt <= (X_W+1)'(IMG_W)) begin
      col_nxt = col_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fv_q <= 1'b0; lv_q <= 1'b0; fv_d <= 1'b0; lv_d <= 1'b0;
      pix_q <= '0;
      first_line <= 1'b1;
      col_cnt <= '0; row_cnt <= '0;
      pix_valid <= 1'b0; pix <= '0; col <= '0; row <= '0;
      frame_start <= 1'b0; frame_end <= 1'b0; frame_id <= '0;
    end else begin
      fv_q  <= fv;
      lv_q  <= lv;
      pix_q <= pix_in;
      fv_d  <= fv_q;
      lv_d  <= lv_q & fv_q;

      frame_start <= fv_q & ~fv_d;
      frame_end   <= ~fv_q & fv_d;
      pix_valid   <= 1'b0;

      if (fv_q && !fv_d) begin
        frame_id   <= frame_id + 1'b1;
        first_line <= 1'b1;
      end

      if (fv_q && lv_q) begin
        col_cnt <= col_nxt;
        row_cnt <= row_nxt;
        if (!lv_d) first_line <= 1'b0;
        if (col_nxt < (X_W+1)'(IMG_W) && row_nxt < (Y_W+1)'(IMG_H)) begin
          pix_valid <= 1'b1;
          pix       <= pix_q;
          col       <= col_nxt[X_W-1:0];
          row       <= row_nxt[Y_W-1:0];
        end
      end
    end
  end

endmodule
