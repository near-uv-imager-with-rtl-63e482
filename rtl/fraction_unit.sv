// fraction_unit: turns a stored raw event into the final telemetry packet.
//
// Raw events carry the sub-pixel offsets as numerator and denominator,
// because division is slow in the FPGA. Just before transmission the two
// fractions Xc = xc_nr / sum and Yc = yc_nr / sum are computed to FRAC_W
// bits by two serial_dividers working in parallel (dividend = numerator
// shifted left by FRAC_W). FRAC_W = 4 is the design's base accuracy; 6 or 8
// bits cost two or four more clocks per event.
//
// Final packet, most significant bit first, left-aligned in out_pkt:
//   frame ID (7) | event ID (8) | Xc int (11) | Xc frac (FRAC_W) | Xc flag |
//   Yc int (10) | Yc frac (FRAC_W) | Yc flag | intensity (10)
// zero-padded to whole bytes: 56 bits = 7 bytes for FRAC_W = 4, 8 bytes for
// FRAC_W = 6 or 8. The fields and their order follow the published packet
// layout; the field widths are this design's choice. out_pkt is sized for
// the widest case (FRAC_W = 8), so at FRAC_W = 4 its last byte is always
// zero and out_bytes is the constant 7. A fraction that would reach 1
// saturates at all ones.
//
// Timing: an event is accepted when idle; out_valid rises PIX_W + FRAC_W + 2
// clocks later and holds until out_ready.
module fraction_unit
  import centroid_pkg::*;
#(
  parameter int FRAC_W = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  raw_event_t  in_ev,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [63:0] out_pkt,
  output logic [3:0]  out_bytes
);

  localparam int N_W   = PIX_W + FRAC_W;
  localparam int BITS  = final_bits(FRAC_W);
  localparam int BYTES = final_bytes(FRAC_W);

  typedef enum logic [1:0] {F_IDLE, F_DIV, F_OUT} fstate_e;

  fstate_e          state;
  raw_event_t       ev_q;
  logic             start;
  logic             xdone, ydone;
  logic [N_W-1:0]   xq, yq;
  logic [SUM_W-1:0] xr_unused, yr_unused;
  logic [FRAC_W-1:0] xf, yf;
  logic [BITS-1:0]  pkt;

  assign in_ready = (state == F_IDLE);
  assign start    = in_valid && in_ready;

  serial_divider #(.N_W(N_W), .D_W(SUM_W)) u_xdiv (
    .clk, .rst_n, .start,
    .dividend({in_ev.xc_nr, {FRAC_W{1'b0}}}), .divisor(in_ev.sum_intensity),
    .busy(), .done(xdone), .quotient(xq), .remainder(xr_unused));

  serial_divider #(.N_W(N_W), .D_W(SUM_W)) u_ydiv (
    .clk, .rst_n, .start,
    .dividend({in_ev.yc_nr, {FRAC_W{1'b0}}}), .divisor(in_ev.sum_intensity),
    .busy(), .done(ydone), .quotient(yq), .remainder(yr_unused));

  assign xf = (xq >> FRAC_W) != '0 ? '1 : xq[FRAC_W-1:0];
  assign yf = (yq >> FRAC_W) != '0 ? '1 : yq[FRAC_W-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= F_IDLE;
      ev_q  <= '0;
      pkt   <= '0;
    end else begin
      case (state)
        F_IDLE: if (start) begin
          ev_q  <= in_ev;
          state <= F_DIV;
        end
        F_DIV: if (xdone && ydone) begin   // both finish on the same clock
          pkt   <= {ev_q.frame_id, ev_q.event_id, ev_q.xc_int, xf, ev_q.xc_flag,
                    ev_q.yc_int, yf, ev_q.yc_flag, ev_q.intensity};
          state <= F_OUT;
        end
        F_OUT: if (out_ready) state <= F_IDLE;
        default: state <= F_IDLE;
      endcase
    end
  end

  assign out_valid = (state == F_OUT);
  assign out_pkt   = {pkt, {(64 - BITS){1'b0}}};
  assign out_bytes = 4'(BYTES);

endmodule
