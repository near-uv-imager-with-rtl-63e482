// serial_divider: unsigned restoring divider, one quotient bit per clock.
//
// Division is done by repeated subtraction: the dividend is shifted into a
// partial remainder one bit at a time, most significant bit first, and the
// divisor is subtracted whenever it fits, giving one quotient bit. An
// N_W-bit dividend therefore takes N_W clocks after the start clock; wider
// results (more fraction bits) cost proportionally more clocks.
//
// Used twice in the design: to turn the sub-pixel numerators into fractions
// of the window sum (dividend = numerator << FRAC_W), and to find a frame's
// mean pixel value for the dynamic threshold.
//
// Interface: pulse start with dividend/divisor while busy is low; done
// pulses for one clock N_W clocks later, with quotient and remainder held
// until the next start. A zero divisor gives an all-ones quotient.
module serial_divider #(
  parameter int N_W = 14,   // dividend / quotient width
  parameter int D_W = 15    // divisor / remainder width
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [N_W-1:0] dividend,
  input  logic [D_W-1:0] divisor,
  output logic           busy,
  output logic           done,
  output logic [N_W-1:0] quotient,
  output logic [D_W-1:0] remainder
);

  localparam int CNT_W = $clog2(N_W + 1);

  logic [D_W-1:0]   div_q;
  logic [N_W-1:0]   shreg;     // dividend bits still to bring down, then quotient
  logic [D_W:0]     rem;
  logic [CNT_W-1:0] cnt;
  logic [D_W:0]     trial;
  logic [D_W:0]     shifted;

  always_comb begin
    shifted = {rem[D_W-1:0], shreg[N_W-1]};
    trial   = shifted - {1'b0, div_q};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      div_q <= '0;
      shreg <= '0;
      rem   <= '0;
      cnt   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        div_q <= divisor;
        shreg <= dividend;
        rem   <= '0;
        cnt   <= CNT_W'(N_W);
      end else if (busy) begin
        if (!trial[D_W]) begin
          rem   <= trial;
          shreg <= {shreg[N_W-2:0], 1'b1};
        end else begin
          rem   <= shifted;
          shreg <= {shreg[N_W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CNT_W'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quotient  = shreg;
  assign remainder = rem[D_W-1:0];

endmodule
