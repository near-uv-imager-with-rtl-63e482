// centroid_pkg: types and widths shared by the photon-event centroiding
// pipeline.
//
// A photon event travels through the design in two forms. The raw event is
// what the detector produces and what is stored in SDRAM: integer centroid,
// sub-pixel numerators with their sign flags, the central intensity and the
// window intensity sum (the denominator). The final packet is what leaves
// for the host after the numerators have been divided by the sum.
//
// Field order follows the packet layout of the design (frame ID, event ID,
// Xc, Xc numerator, Xc flag, Yc, Yc numerator, Yc flag, intensity, sum).
// The field widths are this design's choice: 10-bit pixels, 11-bit column
// (up to 2048), 10-bit row (up to 1024), and 7 + 8 bits of frame and event
// ID so that the final packet is 7 bytes with 4-bit fractions and 8 bytes
// with 8-bit fractions.
package centroid_pkg;

  localparam int PIX_W      = 10;  // sensor data format: 10-bit parallel
  localparam int X_W        = 11;  // column address q
  localparam int Y_W        = 10;  // row address p
  localparam int FRAME_ID_W = 7;
  localparam int EVENT_ID_W = 8;
  localparam int WIN        = 5;   // 5x5 centroiding window
  localparam int SUM_W      = 15;  // 25 * 1023 < 2^15
  localparam int WORD_W     = 16;  // SDRAM word
  localparam int RAW_WORDS  = 6;   // SDRAM words per stored raw event

  typedef logic [PIX_W-1:0] pix_t;

  // 5x5 window, index [row][col]; row 0 is the oldest (top) row, col 0 the
  // oldest (left) column, [2][2] the centre.
  typedef pix_t [WIN-1:0][WIN-1:0] window_t;

  typedef struct packed {
    logic [FRAME_ID_W-1:0] frame_id;
    logic [EVENT_ID_W-1:0] event_id;
    logic [X_W-1:0]        xc_int;
    logic [PIX_W-1:0]      xc_nr;
    logic                  xc_flag;   // 1: left neighbour brighter (offset < 0)
    logic [Y_W-1:0]        yc_int;
    logic [PIX_W-1:0]      yc_nr;
    logic                  yc_flag;   // 1: top neighbour brighter (offset < 0)
    logic [PIX_W-1:0]      intensity;
    logic [SUM_W-1:0]      sum_intensity;
  } raw_event_t;

  localparam int RAW_W = $bits(raw_event_t);  // 83

  // Storage modes of the readout.
  typedef enum logic {MODE_CENTROID = 1'b0, MODE_FRAME = 1'b1} mode_e;

  // Final packet size in bits and bytes for a given fraction width.
  function automatic int final_bits(int frac_w);
    return FRAME_ID_W + EVENT_ID_W + X_W + frac_w + 1 + Y_W + frac_w + 1 + PIX_W;
  endfunction

  function automatic int final_bytes(int frac_w);
    return (final_bits(frac_w) + 7) / 8;
  endfunction

endpackage
