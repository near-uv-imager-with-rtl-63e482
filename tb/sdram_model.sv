// sdram_model: behavioural stand-in for the board SDRAM and its controller,
// seen through the word port of event_store. Not synthesizable.
// Requests are accepted when ready is high; with stall_en, ready drops at
// random (about one clock in STALL_IN) to imitate refresh and row changes,
// and hold keeps it low. Reads return
// in order after LATENCY clocks. Storage is sparse, so any address width
// can be modelled; unwritten words read as 0.
module sdram_model #(
  parameter int ADDR_W   = 28,
  parameter int WORD_W   = 16,
  parameter int LATENCY  = 3,
  parameter int STALL_IN = 4     // 0: never stall
) (
  input  logic              clk,
  input  logic              hold,      // force ready low (controller busy)
  input  logic              stall_en,  // allow random stalls
  input  logic              req,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [WORD_W-1:0] wdata,
  output logic              ready,
  output logic              rvalid,
  output logic [WORD_W-1:0] rdata,
  output int                writes,
  output int                reads
);

  logic [WORD_W-1:0] mem [longint];
  logic [WORD_W-1:0] pipe_d [LATENCY];
  logic              pipe_v [LATENCY];

  initial begin
    ready = 1'b1;
    writes = 0;
    reads = 0;
    for (int i = 0; i < LATENCY; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  assign rvalid = pipe_v[LATENCY-1];
  assign rdata  = pipe_d[LATENCY-1];

  always @(posedge clk) begin
    for (int i = LATENCY - 1; i > 0; i--) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    pipe_v[0] <= 1'b0;
    if (req && ready) begin
      if (we) begin
        mem[longint'(addr)] = wdata;
        writes++;
      end else begin
        pipe_v[0] <= 1'b1;
        pipe_d[0] <= mem.exists(longint'(addr)) ? mem[longint'(addr)] : '0;
        reads++;
      end
    end
    ready <= !hold && (STALL_IN == 0 || !stall_en || $urandom_range(0, STALL_IN - 1) != 0);
  end

endmodule
