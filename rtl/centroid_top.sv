// centroid_top: FPGA readout processor of an MCP photon-counting detector.
//
// A microchannel-plate image intensifier turns each UV photon into a
// splash of light on its phosphor screen, which a CMOS sensor images as a
// small Gaussian spot spread over several pixels. This design reads the
// sensor, finds every spot and reduces it to one short packet: frame ID,
// event ID, integer and sub-pixel centroid, and peak intensity.
//
// Data path, one pixel per clock:
//   cmos_capture   sensor bus -> pixel, column q, row p, frame ID
//   row_array      last five rows of the frame kept on chip
//   window_5x5     5x5 window centred on (q-2, p-2)
//   threshold_unit programmed threshold, or previous frame mean + offset
//   event_detector local maximum, above threshold, not a hot pixel, not a
//                  multiple event -> raw event (numerators and window sum)
//   event_buffer   small on-chip FIFO of raw events
//   event_store    SDRAM writer; at start, reads the stored records back
//                  (last first) before acquiring again
//   fraction_unit  numerator / sum to FRAC_W bits, final 7- or 8-byte packet
//   telemetry_tx   byte stream to the host link
// In frame-transfer mode (mode = 1) event_store writes every pixel to SDRAM
// instead, and the read-back sends each stored pixel word as 2 bytes.
//
// Events found while stored records are being read back are not kept (the
// store is not acquiring). The SDRAM controller, the sensor, the PLL and
// the host link are outside this module: their signals are ports.
//
// Latency: the event centred on (q-2, p-2) is offered to event_buffer 4
// clocks after the edge that samples pixel (q, p) from the sensor bus (one
// register each in the input stage, cmos_capture's outputs, row_array,
// window_5x5 and event_detector). One pixel per clock, no stall.
module centroid_top
  import centroid_pkg::*;
#(
  parameter int IMG_W      = 1280,
  parameter int IMG_H      = 1024,
  parameter int FRAC_W     = 4,
  parameter int FIFO_DEPTH = 16,
  parameter int ADDR_W     = 28
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // CMOS sensor bus
  input  logic                  fv,
  input  logic                  lv,
  input  pix_t                  pix_in,
  // control
  input  mode_e                 mode,
  input  logic                  start,
  input  logic                  thr_mode,
  input  pix_t                  thr_prog,
  input  pix_t                  thr_offset,
  // SDRAM controller word port
  output logic                  sdr_req,
  output logic                  sdr_we,
  output logic [ADDR_W-1:0]     sdr_addr,
  output logic [WORD_W-1:0]     sdr_wdata,
  input  logic                  sdr_ready,
  input  logic                  sdr_rvalid,
  input  logic [WORD_W-1:0]     sdr_rdata,
  // host byte stream
  output logic                  tx_valid,
  input  logic                  tx_ready,
  output logic [7:0]            tx_data,
  output logic                  tx_last,
  // status
  output logic [FRAME_ID_W-1:0] frame_id,
  output pix_t                  threshold,
  output logic [15:0]           event_count,
  output logic [15:0]           hot_count,
  output logic [15:0]           multi_count,
  output logic [15:0]           overflow_count,
  output logic [15:0]           drop_count,
  output logic [ADDR_W-1:0]     stored,
  output logic                  acquiring,
  output pix_t                  frame_mean
);

  // capture
  logic           c_valid, frame_start, frame_end;
  pix_t           c_pix;
  logic [X_W-1:0] c_col;
  logic [Y_W-1:0] c_row;

  cmos_capture #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_cap (
    .clk, .rst_n, .fv, .lv, .pix_in,
    .pix_valid(c_valid), .pix(c_pix), .col(c_col), .row(c_row),
    .frame_start, .frame_end, .frame_id);

  // five-row array and window
  logic           r_valid;
  pix_t [WIN-1:0] r_column;
  logic [X_W-1:0] r_col;
  logic [Y_W-1:0] r_row;

  row_array #(.IMG_W(IMG_W)) u_rows (
    .clk, .rst_n, .in_valid(c_valid), .pix(c_pix), .col(c_col), .row(c_row),
    .out_valid(r_valid), .column(r_column), .out_col(r_col), .out_row(r_row));

  logic           w_valid;
  window_t        w_win;
  logic [X_W-1:0] w_cx;
  logic [Y_W-1:0] w_cy;

  window_5x5 u_win (
    .clk, .rst_n, .in_valid(r_valid), .column(r_column), .col(r_col), .row(r_row),
    .win_valid(w_valid), .win(w_win), .cx(w_cx), .cy(w_cy));

  // threshold
  logic mean_valid;

  threshold_unit #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_thr (
    .clk, .rst_n, .pix_valid(c_valid), .pix(c_pix), .frame_start, .frame_end,
    .thr_mode, .thr_prog, .thr_offset, .threshold, .mean(frame_mean), .mean_valid);

  // detection
  logic       ev_valid, hot, multi;
  raw_event_t ev;

  event_detector u_det (
    .clk, .rst_n, .frame_start, .frame_id, .win_valid(w_valid), .win(w_win),
    .cx(w_cx), .cy(w_cy), .threshold, .ev_valid, .ev, .hot, .multi);

  // on-chip event buffer
  logic       b_valid, b_ready, push;
  raw_event_t b_ev;
  mode_e      store_mode;

  assign push = ev_valid && acquiring && (store_mode == MODE_CENTROID);

  event_buffer #(.DEPTH(FIFO_DEPTH)) u_buf (
    .clk, .rst_n, .push, .din(ev), .pop_valid(b_valid), .pop_ready(b_ready),
    .dout(b_ev), .overflow_count, .level());

  // SDRAM store
  logic              rd_valid, rd_ready;
  raw_event_t        rd_event;
  logic [WORD_W-1:0] rd_word;

  event_store #(.ADDR_W(ADDR_W)) u_store (
    .clk, .rst_n, .mode, .start,
    .ev_valid(b_valid), .ev_ready(b_ready), .ev(b_ev),
    .pix_valid(c_valid), .pix(c_pix), .frame_start,
    .sdr_req, .sdr_we, .sdr_addr, .sdr_wdata, .sdr_ready, .sdr_rvalid, .sdr_rdata,
    .rd_valid, .rd_ready, .rd_mode(store_mode), .rd_event, .rd_word,
    .stored, .acquiring, .drop_count);

  // sub-pixel division and telemetry
  logic        f_in_ready, f_valid, t_in_ready, t_in_valid, word_valid;
  logic [63:0] f_pkt, t_data;
  logic [3:0]  f_bytes, t_bytes;

  fraction_unit #(.FRAC_W(FRAC_W)) u_frac (
    .clk, .rst_n,
    .in_valid(rd_valid && store_mode == MODE_CENTROID), .in_ready(f_in_ready), .in_ev(rd_event),
    .out_valid(f_valid), .out_ready(t_in_ready), .out_pkt(f_pkt), .out_bytes(f_bytes));

  assign word_valid = rd_valid && (store_mode == MODE_FRAME) && !f_valid;
  assign rd_ready   = (store_mode == MODE_CENTROID) ? f_in_ready : (t_in_ready && !f_valid);
  assign t_in_valid = f_valid || word_valid;
  assign t_data     = f_valid ? f_pkt : {rd_word, 48'h0};
  assign t_bytes    = f_valid ? f_bytes : 4'd2;

  telemetry_tx u_tx (
    .clk, .rst_n, .in_valid(t_in_valid), .in_ready(t_in_ready), .in_data(t_data),
    .in_bytes(t_bytes), .tx_valid, .tx_ready, .tx_data, .tx_last);

  // status counters (saturating)
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      event_count <= '0;
      hot_count   <= '0;
      multi_count <= '0;
    end else begin
      if (push  && event_count != '1) event_count <= event_count + 1'b1;
      if (hot   && hot_count   != '1) hot_count   <= hot_count + 1'b1;
      if (multi && multi_count != '1) multi_count <= multi_count + 1'b1;
    end
  end

endmodule
