// subpixel_calc: numerators and denominator of the sub-pixel centroid.
//
// The integer centroid of an event is the position of its brightest pixel.
// The sub-pixel offset is formed from the difference between the pixels to
// the right and left of the centre (x) and below and above it (y), divided
// by the total intensity of the 5x5 window. The division is deferred until
// the event is read out for transmission, so this block only delivers
// |R - L|, |B - T|, the sign of each difference (flag = 1 when the offset is
// negative, i.e. left or top brighter) and the 25-pixel sum.
//
// Using the window sum as denominator is inferred from the packet example of
// the design (numerators 12 and 6 over a sum of 289 give the fractions 0.04
// and 0.02); the flag polarity is this design's choice.
//
// Purely combinational.
module subpixel_calc
  import centroid_pkg::*;
(
  input  window_t           win,
  output pix_t              xc_nr,
  output logic              xc_flag,
  output pix_t              yc_nr,
  output logic              yc_flag,
  output logic [SUM_W-1:0]  sum
);

  localparam int C = WIN / 2;

  pix_t l, r, t, b;

  always_comb begin
    l = win[C][C-1];
    r = win[C][C+1];
    t = win[C-1][C];
    b = win[C+1][C];
    xc_flag = (l > r);
    xc_nr   = xc_flag ? (l - r) : (r - l);
    yc_flag = (t > b);
    yc_nr   = yc_flag ? (t - b) : (b - t);
    sum = '0;
    for (int i = 0; i < WIN; i++)
      for (int j = 0; j < WIN; j++)
        sum += SUM_W'(win[i][j]);
  end

endmodule
