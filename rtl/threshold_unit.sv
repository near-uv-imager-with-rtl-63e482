// threshold_unit: supplies the photon-event threshold.
//
// The threshold separates photon events from the background. It is either
// a programmed number (thr_mode = 0) or derived from the image itself
// (thr_mode = 1): the best threshold lies at or slightly above the mean
// signal level of the image, so in dynamic mode it is the mean pixel value
// of the previous frame plus a programmed offset (saturating at full scale).
//
// Every pixel of a frame is summed and counted. At frame end the sum is
// divided by the count in a serial_divider (one quotient bit per clock, 31
// clocks at full size), during the frame's vertical blanking. Until the
// first frame has been measured, and whenever thr_mode = 0, thr_prog is
// used. Using the previous frame's mean, and the offset input, are this
// design's choices.
//
// Interface: pixel stream and frame strobes from cmos_capture; threshold is
// a registered level that changes only after a frame end.
module threshold_unit
  import centroid_pkg::*;
#(
  parameter int IMG_W = 1280,
  parameter int IMG_H = 1024
) (
  input  logic clk,
  input  logic rst_n,
  input  logic pix_valid,
  input  pix_t pix,
  input  logic frame_start,
  input  logic frame_end,
  input  logic thr_mode,
  input  pix_t thr_prog,
  input  pix_t thr_offset,
  output pix_t threshold,
  output pix_t mean,
  output logic mean_valid
);

  localparam int CNT_W = $clog2(IMG_W * IMG_H + 1);
  localparam int ACC_W = CNT_W + PIX_W;

  logic [ACC_W-1:0] acc;
  logic [CNT_W-1:0] cnt;
  logic             div_done;
  logic [ACC_W-1:0] quot;
  logic [CNT_W-1:0] rem_unused;
  logic [PIX_W:0]   dyn;

  serial_divider #(.N_W(ACC_W), .D_W(CNT_W)) u_div (
    .clk, .rst_n,
    .start    (frame_end && cnt != '0),
    .dividend (acc),
    .divisor  (cnt),
    .busy     (),
    .done     (div_done),
    .quotient (quot),
    .remainder(rem_unused)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc        <= '0;
      cnt        <= '0;
      mean       <= '0;
      mean_valid <= 1'b0;
    end else begin
      if (frame_start) begin
        acc <= '0;
        cnt <= '0;
      end else if (pix_valid) begin
        acc <= acc + ACC_W'(pix);
        cnt <= cnt + 1'b1;
      end
      if (div_done) begin
        mean       <= (quot > ACC_W'({PIX_W{1'b1}})) ? '1 : quot[PIX_W-1:0];
        mean_valid <= 1'b1;
      end
    end
  end

  always_comb begin
    dyn = {1'b0, mean} + {1'b0, thr_offset};
    if (thr_mode && mean_valid)
      threshold = dyn[PIX_W] ? '1 : dyn[PIX_W-1:0];
    else
      threshold = thr_prog;
  end

endmodule
