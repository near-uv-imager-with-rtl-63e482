// event_buffer: on-chip register block holding raw events until the SDRAM
// writer takes them.
//
// Events are found at most once per pixel clock but each one takes several
// SDRAM word writes, and the SDRAM may be busy, so the detector writes into
// this first-in first-out buffer of DEPTH records held in registers. A push
// when the buffer is full loses the event and increments overflow_count
// (saturating). DEPTH is this design's choice.
//
// Interface: push/din (no back-pressure towards the detector);
// pop_valid/pop_ready/dout is a valid/ready stream, dout is the oldest
// record and is taken on a clock with both high. Reading and writing in the
// same clock is allowed, also when full.
module event_buffer
  import centroid_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push,
  input  raw_event_t  din,
  output logic        pop_valid,
  input  logic        pop_ready,
  output raw_event_t  dout,
  output logic [15:0] overflow_count,
  output logic [$clog2(DEPTH):0] level
);

  localparam int AW = $clog2(DEPTH);

  raw_event_t       regs [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_pop, do_push, full;

  assign full      = (level == (AW+1)'(DEPTH));
  assign pop_valid = (level != '0);
  assign do_pop    = pop_valid && pop_ready;
  assign do_push   = push && (!full || do_pop);
  assign dout      = regs[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_push) regs[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr         <= '0;
      rd_ptr         <= '0;
      level          <= '0;
      overflow_count <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      level <= level + (AW+1)'(do_push) - (AW+1)'(do_pop);
      if (push && !do_push && overflow_count != '1)
        overflow_count <= overflow_count + 1'b1;
    end
  end

  // a record is never taken from an empty buffer
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   do_pop |-> level != '0);

endmodule
