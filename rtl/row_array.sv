// row_array: on-chip store of the five most recent rows of the frame.
//
// Reading the SDRAM for every pixel of the centroiding window is too slow,
// so the last five rows are kept in block RAM instead. The current row is
// the incoming pixel itself; the four rows above it are held in one memory
// of IMG_W words, each word packing the pixels of rows p-1..p-4 at one
// column. For every pixel the word at its column is read, the 5-pixel
// column {p, p-1, p-2, p-3, p-4} is output, and the word is written back
// shifted by one row, so the oldest row value is overwritten by the newest.
//
// Interface: in_valid/pix/col/row from cmos_capture. out_valid/column with
// out_col/out_row one clock later. column[0] is the oldest row (p-4),
// column[4] the current row p.
//
// Timing: one pixel per clock, one clock latency. The memory is read one
// clock and written the next at the same column; consecutive pixels use
// different columns, so read and write never collide. Nothing is cleared at
// frame start: the first four rows of a frame see the previous frame's
// data, and the window stage ignores those positions.
module row_array
  import centroid_pkg::*;
#(
  parameter int IMG_W = 1280
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  pix_t                 pix,
  input  logic [X_W-1:0]       col,
  input  logic [Y_W-1:0]       row,
  output logic                 out_valid,
  output pix_t [WIN-1:0]       column,
  output logic [X_W-1:0]       out_col,
  output logic [Y_W-1:0]       out_row
);

  localparam int OLD = WIN - 1;           // rows held in memory
  typedef pix_t [OLD-1:0] word_t;         // [3] = p-1 ... [0] = p-4

  word_t mem [IMG_W];
  word_t rd_word;
  pix_t  pix_d;
  logic  [$clog2(IMG_W)-1:0] addr;

  assign addr = col[$clog2(IMG_W)-1:0];

  // synchronous read
  always_ff @(posedge clk) begin
    if (in_valid) rd_word <= mem[addr];
  end

  // write back one clock later, shifted up by one row
  always_ff @(posedge clk) begin
    if (out_valid) mem[out_col[$clog2(IMG_W)-1:0]] <= {pix_d, rd_word[OLD-1:1]};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_col   <= '0;
      out_row   <= '0;
      pix_d     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_col <= col;
        out_row <= row;
        pix_d   <= pix;
      end
    end
  end

  assign column = {pix_d, rd_word};

endmodule
