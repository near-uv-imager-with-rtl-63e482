// tb_event_store: the SDRAM controller loop against a behavioural SDRAM
// with random stalls and 3-clock read latency.
//   1. after reset the store is empty and acquires at once;
//   2. centroiding mode: 10 raw events are written (6 words each); a start
//      pulse sends them back last first, each intact, and the address
//      returns to 0;
//   3. frame-transfer mode: a 4 x 3 frame is stored one word per pixel with
//      the first-pixel mark; read-back returns it in reverse order;
//   4. a full SDRAM (ADDR_W = 6: 10 events) drops and counts the rest.
module tb_event_store;
  import centroid_pkg::*;
  localparam int ADDR_W = 6;

  logic clk = 0, rst_n = 0;
  mode_e mode = MODE_CENTROID;
  logic start = 0;
  logic ev_valid = 0, ev_ready;
  raw_event_t ev;
  logic pix_valid = 0, frame_start = 0;
  pix_t pix = 0;
  logic sdr_req, sdr_we, sdr_ready, sdr_rvalid;
  logic [ADDR_W-1:0] sdr_addr;
  logic [WORD_W-1:0] sdr_wdata, sdr_rdata;
  logic rd_valid, rd_ready = 0;
  mode_e rd_mode;
  raw_event_t rd_event;
  logic [WORD_W-1:0] rd_word;
  logic [ADDR_W-1:0] stored;
  logic acquiring;
  logic [15:0] drop_count;
  int writes, reads;
  int checks = 0, failures = 0;

  event_store #(.ADDR_W(ADDR_W)) dut (.*);
  sdram_model #(.ADDR_W(ADDR_W)) u_mem (
    .clk, .hold(1'b0), .stall_en(1'b1), .req(sdr_req), .we(sdr_we), .addr(sdr_addr), .wdata(sdr_wdata),
    .ready(sdr_ready), .rvalid(sdr_rvalid), .rdata(sdr_rdata), .writes, .reads);

  always #5 clk = ~clk;

  function automatic raw_event_t mk(int n);
    raw_event_t e;
    e.frame_id = FRAME_ID_W'(n + 1);
    e.event_id = EVENT_ID_W'(n);
    e.xc_int = X_W'(100 + n * 7);
    e.xc_nr = PIX_W'(n * 3);
    e.xc_flag = n[0];
    e.yc_int = Y_W'(50 + n);
    e.yc_nr = PIX_W'(n * 5 + 1);
    e.yc_flag = ~n[0];
    e.intensity = PIX_W'(900 - n);
    e.sum_intensity = SUM_W'(20000 + n * 77);
    return e;
  endfunction

  task automatic send_event(raw_event_t e);
    ev = e; ev_valid = 1;
    @(negedge clk);
    while (!(ev_ready)) @(negedge clk);
    // accepted on the clock edge just passed only if ev_ready was high before it
    ev_valid = 0;
  endtask

  task automatic pulse_start();
    start = 1; @(negedge clk); start = 0;
  endtask

  // take one read-back record, random delay on rd_ready
  task automatic take(output raw_event_t e, output logic [WORD_W-1:0] w, input int max_wait);
    int n;
    n = 0;
    while (!rd_valid && n < max_wait) begin @(negedge clk); n++; end
    repeat ($urandom_range(0, 2)) @(negedge clk);
    e = rd_event; w = rd_word;
    rd_ready = 1; @(negedge clk); rd_ready = 0;
  endtask

  initial begin
    raw_event_t e;
    logic [WORD_W-1:0] w;
    ev = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (!acquiring || stored != 0) begin failures++; $display("FAIL not acquiring after reset"); end

    // 2. centroiding mode
    for (int i = 0; i < 8; i++) begin
      ev = mk(i); ev_valid = 1;
      do @(posedge clk); while (!ev_ready);
      @(negedge clk); ev_valid = 0;
      while (!ev_ready) @(negedge clk);
    end
    checks++;
    if (stored != 8 || writes != 8 * RAW_WORDS) begin failures++; $display("FAIL stored %0d writes %0d", stored, writes); end
    pulse_start();
    repeat (2) @(negedge clk);
    checks++;
    if (acquiring) begin failures++; $display("FAIL still acquiring after start"); end
    for (int i = 7; i >= 0; i--) begin
      take(e, w, 200);
      checks++;
      if (e != mk(i) || rd_mode != MODE_CENTROID) begin failures++; $display("FAIL read-back %0d: %p", i, e); end
    end
    repeat (4) @(negedge clk);
    checks++;
    if (stored != 0 || !acquiring) begin failures++; $display("FAIL after drain stored %0d", stored); end

    // 3. frame-transfer mode: takes effect at the next acquisition
    mode = MODE_FRAME;
    pulse_start();
    repeat (3) @(negedge clk);
    frame_start = 1; @(negedge clk); frame_start = 0;
    begin
      int ok;
      ok = 0;
      for (int i = 0; i < 12; i++) begin
        pix_valid = 1; pix = pix_t'(i * 11 + 3);
        #1;
        if (sdr_ready) ok++;
        @(negedge clk);
      end
      pix_valid = 0;
      checks++;
      if (stored != ADDR_W'(ok) || drop_count != 16'(12 - ok)) begin
        failures++; $display("FAIL frame stored %0d drops %0d ok %0d", stored, drop_count, ok);
      end
    end
    mode = MODE_CENTROID;
    pulse_start();
    begin
      int n;
      int first_marks;
      n = int'(stored);
      first_marks = 0;
      for (int i = 0; i < n; i++) begin
        take(e, w, 200);
        checks++;
        if (rd_mode != MODE_FRAME || w[PIX_W-1:0] > pix_t'(11 * 11 + 3)) begin
          failures++; $display("FAIL frame word %h", w);
        end
        if (w[WORD_W-1]) first_marks++;
      end
      checks++;
      if (first_marks != 1) begin failures++; $display("FAIL first-pixel marks %0d", first_marks); end
    end
    repeat (4) @(negedge clk);

    // 4. full: 64 words hold 10 events
    for (int i = 0; i < 13; i++) begin
      ev = mk(i); ev_valid = 1;
      do @(posedge clk); while (!ev_ready);
      @(negedge clk); ev_valid = 0;
      while (!ev_ready) @(negedge clk);
    end
    checks++;
    if (stored != 10 || drop_count < 3) begin failures++; $display("FAIL full stored %0d drops %0d", stored, drop_count); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
