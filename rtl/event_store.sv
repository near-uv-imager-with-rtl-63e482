// event_store: SDRAM address controller of the readout.
//
// The on-chip buffer can only hold a few events, so every event is written
// to the board SDRAM as soon as it is produced, and read back and sent to
// the host later. The controller follows the storage loop of the
// centroiding flowchart:
//   START   if the SDRAM address is not 0, read the record below it,
//           hand it to the transmit path, decrement the address and repeat;
//           when the address reaches 0, start acquiring;
//   ACQUIRE centroiding mode: take a raw event from event_buffer, write it
//           as RAW_WORDS 16-bit words, increment the address;
//           frame-transfer mode: write every pixel as one 16-bit word
//           (bit 15 set on the first pixel of a frame, pixel in the low
//           bits) and increment the address.
// A start pulse ends acquisition (after the event being written) and
// returns to START, so what was stored is sent out, last record first.
// The mode input is sampled when acquisition begins; records are read back
// in the mode they were stored in. Records that do not fit in the SDRAM, and
// frame pixels arriving while the SDRAM is not ready, are dropped and
// counted.
//
// Both modes in one design, the 16-bit word, the record layout and the
// SDRAM port are this design's choices; the address loop is the design's.
//
// SDRAM port (to a word-wide SDRAM controller): sdr_req with sdr_we,
// sdr_addr, sdr_wdata is accepted on a clock with sdr_ready high; read data
// return in request order on sdr_rvalid/sdr_rdata, any number of clocks
// later. Read-back port: rd_valid/rd_ready stream with rd_mode telling
// whether rd_event or rd_word carries the record.
module event_store
  import centroid_pkg::*;
#(
  parameter int ADDR_W = 28
) (
  input  logic               clk,
  input  logic               rst_n,
  input  mode_e              mode,
  input  logic               start,
  // raw events from event_buffer
  input  logic               ev_valid,
  output logic               ev_ready,
  input  raw_event_t         ev,
  // pixels for frame-transfer mode
  input  logic               pix_valid,
  input  pix_t               pix,
  input  logic               frame_start,
  // SDRAM controller
  output logic               sdr_req,
  output logic               sdr_we,
  output logic [ADDR_W-1:0]  sdr_addr,
  output logic [WORD_W-1:0]  sdr_wdata,
  input  logic               sdr_ready,
  input  logic               sdr_rvalid,
  input  logic [WORD_W-1:0]  sdr_rdata,
  // records read back
  output logic               rd_valid,
  input  logic               rd_ready,
  output mode_e              rd_mode,
  output raw_event_t         rd_event,
  output logic [WORD_W-1:0]  rd_word,
  // status
  output logic [ADDR_W-1:0]  stored,
  output logic               acquiring,
  output logic [15:0]        drop_count
);

  localparam int PAD_W = RAW_WORDS * WORD_W;
  localparam longint MEM_WORDS = 64'd1 << ADDR_W;
  localparam longint MAX_EVENTS = MEM_WORDS / longint'(RAW_WORDS);
  localparam int WC_W = $clog2(RAW_WORDS + 1);

  typedef enum logic [2:0] {S_START, S_RD_REQ, S_RD_OUT, S_ACQ, S_WR} state_e;

  state_e              state;
  mode_e               cur_mode;
  logic [ADDR_W-1:0]   addr;          // records stored
  logic [WC_W-1:0]     issued, received;
  logic [PAD_W-1:0]    buf_q;         // record being written or read
  logic                start_pend;
  logic                first_pix;
  logic [ADDR_W+2:0]   base;          // word address of a record
  logic [WC_W-1:0]     n_words;
  logic                full;
  logic [ADDR_W-1:0]   rec;           // record index being accessed

  assign n_words = (cur_mode == MODE_FRAME) ? WC_W'(1) : WC_W'(RAW_WORDS);
  assign rec     = (state == S_RD_REQ || state == S_RD_OUT) ? addr - 1'b1 : addr;
  assign base    = (cur_mode == MODE_FRAME) ? (ADDR_W+3)'(rec)
                                            : (ADDR_W+3)'(rec) * (ADDR_W+3)'(RAW_WORDS);
  assign full    = (cur_mode == MODE_FRAME) ? (addr == '1)
                                            : (64'(addr) >= MAX_EVENTS);

  // SDRAM request
  always_comb begin
    sdr_req   = 1'b0;
    sdr_we    = 1'b0;
    sdr_addr  = '0;
    sdr_wdata = '0;
    case (state)
      S_RD_REQ: begin
        sdr_req  = (issued != n_words);
        sdr_addr = ADDR_W'(base + (ADDR_W+3)'(issued));
      end
      S_WR: begin
        sdr_req   = 1'b1;
        sdr_we    = 1'b1;
        sdr_addr  = ADDR_W'(base + (ADDR_W+3)'(issued));
        sdr_wdata = buf_q[PAD_W-1 -: WORD_W];
      end
      S_ACQ: begin
        if (cur_mode == MODE_FRAME && pix_valid && !full) begin
          sdr_req   = 1'b1;
          sdr_we    = 1'b1;
          sdr_addr  = addr;
          sdr_wdata = {(first_pix || frame_start), {(WORD_W-1-PIX_W){1'b0}}, pix};
        end
      end
      default: ;
    endcase
  end

  assign ev_ready  = (state == S_ACQ) && (cur_mode == MODE_CENTROID) && !start_pend;
  assign rd_valid  = (state == S_RD_OUT);
  assign rd_mode   = cur_mode;
  assign rd_event  = raw_event_t'(buf_q[PAD_W-1 -: RAW_W]);
  assign rd_word   = buf_q[WORD_W-1:0];
  assign stored    = addr;
  assign acquiring = (state == S_ACQ) || (state == S_WR);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_START;
      cur_mode   <= MODE_CENTROID;
      addr       <= '0;
      issued     <= '0;
      received   <= '0;
      buf_q      <= '0;
      start_pend <= 1'b0;
      first_pix  <= 1'b0;
      drop_count <= '0;
    end else begin
      if (start && acquiring) start_pend <= 1'b1;

      case (state)
        S_START: begin
          start_pend <= 1'b0;
          issued     <= '0;
          received   <= '0;
          if (addr == '0) begin
            state     <= S_ACQ;
            cur_mode  <= mode;
            first_pix <= 1'b0;
          end else begin
            state <= S_RD_REQ;
          end
        end

        S_RD_REQ: begin
          if (sdr_req && sdr_ready) issued <= issued + 1'b1;
          if (sdr_rvalid) begin
            buf_q    <= (cur_mode == MODE_FRAME) ? PAD_W'(sdr_rdata)
                                                 : {buf_q[PAD_W-WORD_W-1:0], sdr_rdata};
            received <= received + 1'b1;
            if (received == n_words - 1'b1) state <= S_RD_OUT;
          end
        end

        S_RD_OUT: begin
          if (rd_ready) begin
            addr  <= addr - 1'b1;
            state <= S_START;
          end
        end

        S_ACQ: begin
          if (start_pend || (start && acquiring)) begin
            state <= S_START;
          end else if (cur_mode == MODE_CENTROID) begin
            if (ev_valid) begin
              if (full) begin
                if (drop_count != '1) drop_count <= drop_count + 1'b1;
              end else begin
                buf_q  <= {ev, {(PAD_W-RAW_W){1'b0}}};
                issued <= '0;
                state  <= S_WR;
              end
            end
          end else begin
            if (frame_start) first_pix <= 1'b1;
            if (pix_valid) begin
              if (sdr_req && sdr_ready) begin
                addr      <= addr + 1'b1;
                first_pix <= 1'b0;
              end else if (drop_count != '1) begin
                drop_count <= drop_count + 1'b1;
              end
            end
          end
        end

        S_WR: begin
          if (sdr_ready) begin
            buf_q  <= {buf_q[PAD_W-WORD_W-1:0], {WORD_W{1'b0}}};
            issued <= issued + 1'b1;
            if (issued == WC_W'(RAW_WORDS - 1)) begin
              addr  <= addr + 1'b1;
              state <= S_ACQ;
            end
          end
        end

        default: state <= S_START;
      endcase
    end
  end

  // a read-back record is held until it is taken
  a_rd_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              rd_valid && !rd_ready |=> rd_valid && $stable(rd_event));

endmodule
