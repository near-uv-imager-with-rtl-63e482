// event_detector: decides whether the centre of a 5x5 window is a photon
// event and, if so, emits its raw centroid record.
//
// The tests follow the centroiding flowchart of the design, evaluated in
// parallel on every window:
//   1. local maximum: the centre is >= all 24 neighbours, and strictly >
//      those that precede it in raster order, so a flat top of equal pixels
//      yields exactly one event (tie rule is this design's choice);
//   2. the centre is above the threshold;
//   3. hot pixel: if all 24 neighbours are at or below the threshold
//      ("all surrounding pixels zero" once the threshold is applied), the
//      lone bright pixel is a hot pixel, not a photon, and is dropped;
//   4. multiple event: if a pixel of the outer ring is above threshold and
//      brighter than the inner-ring pixel between it and the centre, the
//      profile rises again, so a second event overlaps the window; the event
//      is dropped. The rule is this design's choice: the design only says
//      that multiple events are flagged before centroiding.
// An accepted event gets the next event ID of the frame (reset by
// frame_start) and leaves as a raw_event_t: integer centroid (cx, cy),
// numerators and flags from subpixel_calc, centre intensity and window sum.
//
// Interface: window stream in, ev_valid/ev out; hot and multi pulse when a
// window is rejected for that reason (for status counters).
// Timing: one window per clock, one clock latency, no back-pressure.
module event_detector
  import centroid_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  frame_start,
  input  logic [FRAME_ID_W-1:0] frame_id,
  input  logic                  win_valid,
  input  window_t               win,
  input  logic [X_W-1:0]        cx,
  input  logic [Y_W-1:0]        cy,
  input  pix_t                  threshold,
  output logic                  ev_valid,
  output raw_event_t            ev,
  output logic                  hot,
  output logic                  multi
);

  localparam int C = WIN / 2;

  pix_t centre;
  logic is_max, above, lone, second_peak, accept;
  pix_t xc_nr, yc_nr;
  logic xc_flag, yc_flag;
  logic [SUM_W-1:0] sum;
  logic [EVENT_ID_W-1:0] event_cnt;

  subpixel_calc u_sub (
    .win(win), .xc_nr(xc_nr), .xc_flag(xc_flag),
    .yc_nr(yc_nr), .yc_flag(yc_flag), .sum(sum)
  );

  // inner-ring index one step towards the centre
  function automatic int towards_centre(int k);
    return (k < C) ? k + 1 : (k > C) ? k - 1 : k;
  endfunction

  always_comb begin
    centre      = win[C][C];
    is_max      = 1'b1;
    lone        = 1'b1;
    second_peak = 1'b0;
    for (int i = 0; i < WIN; i++) begin
      for (int j = 0; j < WIN; j++) begin
        if (!(i == C && j == C)) begin
          if (i * WIN + j < C * WIN + C) begin
            if (win[i][j] >= centre) is_max = 1'b0;
          end else begin
            if (win[i][j] > centre) is_max = 1'b0;
          end
          if (win[i][j] > threshold) lone = 1'b0;
          if ((i == 0 || i == WIN-1 || j == 0 || j == WIN-1) &&
              win[i][j] > threshold &&
              win[i][j] > win[towards_centre(i)][towards_centre(j)])
            second_peak = 1'b1;
        end
      end
    end
    above  = centre > threshold;
    accept = win_valid && is_max && above && !lone && !second_peak;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ev_valid  <= 1'b0;
      ev        <= '0;
      hot       <= 1'b0;
      multi     <= 1'b0;
      event_cnt <= '0;
    end else begin
      ev_valid <= accept;
      hot      <= win_valid && is_max && above && lone;
      multi    <= win_valid && is_max && above && !lone && second_peak;
      if (frame_start) event_cnt <= '0;
      if (accept) begin
        event_cnt        <= frame_start ? EVENT_ID_W'(1) : event_cnt + 1'b1;
        ev.frame_id      <= frame_id;
        ev.event_id      <= frame_start ? '0 : event_cnt;
        ev.xc_int        <= cx;
        ev.xc_nr         <= xc_nr;
        ev.xc_flag       <= xc_flag;
        ev.yc_int        <= cy;
        ev.yc_nr         <= yc_nr;
        ev.yc_flag       <= yc_flag;
        ev.intensity     <= centre;
        ev.sum_intensity <= sum;
      end
    end
  end

endmodule
