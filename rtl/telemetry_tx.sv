// telemetry_tx: byte serialiser towards the host link.
//
// Each record handed in (a final event packet of 7 or 8 bytes, or a stored
// frame word of 2 bytes) is left-aligned in in_data with its length in
// in_bytes; it is sent as a stream of bytes, most significant first, with
// tx_last on the final byte of the record. The physical host link is not
// part of this design; any byte-wide link (UART, USB FIFO, SD card writer)
// can take the stream.
//
// Timing: a record is accepted when idle (in_ready), its first byte is
// offered on the next clock, one byte per clock while tx_ready is high.
module telemetry_tx (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [63:0] in_data,
  input  logic [3:0]  in_bytes,
  output logic        tx_valid,
  input  logic        tx_ready,
  output logic [7:0]  tx_data,
  output logic        tx_last
);

  logic [63:0] sh;
  logic [3:0]  left;

  assign in_ready = (left == '0);
  assign tx_valid = (left != '0);
  assign tx_data  = sh[63:56];
  assign tx_last  = (left == 4'd1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sh   <= '0;
      left <= '0;
    end else if (in_valid && in_ready) begin
      sh   <= in_data;
      left <= (in_bytes > 4'd8) ? 4'd8 : in_bytes;
    end else if (tx_valid && tx_ready) begin
      sh   <= {sh[55:0], 8'h00};
      left <= left - 1'b1;
    end
  end

  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));

endmodule
