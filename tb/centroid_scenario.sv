// centroid_scenario: end-to-end stimulus and checker for centroid_top.
// It is the sensor, the SDRAM (through sdram_model) and the host: its ports
// are the mirror of the readout's ports. Two testbenches wrap it, one at a
// reduced frame size and one at the design's default size.
//
// Sequence:
//   frame 1  programmed threshold. A grid of Gaussian-like spots on a noisy
//            background (noise always below threshold), one grid site
//            replaced by a hot pixel and one by two overlapping spots;
//   frame 2  dynamic threshold (frame 1 mean + offset), same kind of image;
//   frame 3  a dense spot grid while the SDRAM is held busy, so the on-chip
//            event buffer overflows and only the first FIFO_DEPTH + 1 events
//            of the frame survive;
//   start    everything stored is read back, last event first, divided and
//            sent as 7-byte packets; every packet is checked;
//   frame 4  frame-transfer mode: the frame is stored pixel by pixel, and a
//            second start returns it, in reverse order, as 2-byte words.
// Expected packets are computed from the image the scenario generated: the
// integer centroid is the spot position, numerators and sum are read from
// the image, and the fractions are floor(nr * 16 / sum).
// Counts of each mechanism (events, hot pixels, multiple events, overflow,
// dynamic threshold, read-backs, frame words) must all be non-zero.
module centroid_scenario
  import centroid_pkg::*;
#(
  parameter int W          = 1280,
  parameter int H          = 1024,
  parameter int FIFO_DEPTH = 16,
  parameter int ADDR_W     = 28,
  parameter bit FRAME_TEST = 1'b1,
  parameter longint WATCHDOG = 64'd100_000_000
) (
  output logic                  clk,
  output logic                  rst_n,
  output logic                  fv,
  output logic                  lv,
  output pix_t                  pix_in,
  output mode_e                 mode,
  output logic                  start,
  output logic                  thr_mode,
  output pix_t                  thr_prog,
  output pix_t                  thr_offset,
  input  logic                  sdr_req,
  input  logic                  sdr_we,
  input  logic [ADDR_W-1:0]     sdr_addr,
  input  logic [WORD_W-1:0]     sdr_wdata,
  output logic                  sdr_ready,
  output logic                  sdr_rvalid,
  output logic [WORD_W-1:0]     sdr_rdata,
  input  logic                  tx_valid,
  output logic                  tx_ready,
  input  logic [7:0]            tx_data,
  input  logic                  tx_last,
  input  logic [FRAME_ID_W-1:0] frame_id,
  input  pix_t                  threshold,
  input  logic [15:0]           event_count,
  input  logic [15:0]           hot_count,
  input  logic [15:0]           multi_count,
  input  logic [15:0]           overflow_count,
  input  logic [15:0]           drop_count,
  input  logic [ADDR_W-1:0]     stored,
  input  logic                  acquiring
);

  localparam pix_t PROG_THR = 8;
  localparam pix_t OFFSET   = 4;

  typedef struct {
    int frame, id, x, y, xnr, xflag, ynr, yflag, inten, sum;
  } exp_ev_t;

  pix_t    img [];
  exp_ev_t expq [$];      // expected events in storage order
  logic [7:0] rx [$];     // bytes of the record being received
  logic [63:0] records [$];
  int      rec_len [$];
  logic    hold = 0, stall_en = 1;
  int      checks = 0, failures = 0;
  int      n_dyn = 0;
  int      writes, reads;

  sdram_model #(.ADDR_W(ADDR_W)) u_mem (
    .clk, .hold, .stall_en, .req(sdr_req), .we(sdr_we), .addr(sdr_addr), .wdata(sdr_wdata),
    .ready(sdr_ready), .rvalid(sdr_rvalid), .rdata(sdr_rdata), .writes, .reads);

  initial clk = 0;
  always #5 clk = ~clk;

  // host side: collect bytes into records
  always @(posedge clk) begin
    if (rst_n && tx_valid && tx_ready) begin
      rx.push_back(tx_data);
      if (tx_last) begin
        logic [63:0] r;
        r = '0;
        foreach (rx[i]) r[63 - 8 * i -: 8] = rx[i];
        records.push_back(r);
        rec_len.push_back(rx.size());
        rx.delete();
      end
    end
    tx_ready <= ($urandom_range(0, 4) != 0);
  end

  function automatic int at(int r, int c);
    return int'(img[r * W + c]);
  endfunction

  function automatic void put_max(int r, int c, int v);
    if (r >= 0 && r < H && c >= 0 && c < W && v > int'(img[r * W + c]))
      img[r * W + c] = pix_t'((v > 1023) ? 1023 : v);
  endfunction

  // spot profile by squared distance from the peak, plus background noise;
  // where two spots overlap the brighter profile wins
  function automatic void add_spot(int y, int x, int peak);
    for (int dy = -2; dy <= 2; dy++)
      for (int dx = -2; dx <= 2; dx++) begin
        int d, v;
        d = dy * dy + dx * dx;
        v = (d == 0) ? peak : (d == 1) ? peak / 2 + $urandom_range(0, peak / 6) :
            (d == 2) ? peak / 3 : (d == 4) ? peak / 6 : (d == 5) ? peak / 8 : peak / 12;
        put_max(y + dy, x + dx, v + int'($urandom_range(0, 3)));
      end
  endfunction

  // build the image of a frame; returns the frame mean
  function automatic int build(int frame, int sx, int sy, bit specials);
    longint s;
    int k;
    foreach (img[i]) img[i] = pix_t'($urandom_range(0, 3));
    k = 0;
    for (int y = 4; y <= H - 5; y += sy)
      for (int x = 4; x <= W - 5; x += sx) begin
        if (specials && k == 1) begin
          img[y * W + x] = 500;                       // hot pixel
        end else if (specials && k == 2 && x + 2 <= W - 3) begin
          add_spot(y, x, 120);                        // two overlapping events
          add_spot(y, x + 2, 90);
        end else begin
          add_spot(y, x, $urandom_range(40, 300));
        end
        k++;
      end
    s = 0;
    foreach (img[i]) s += longint'(img[i]);
    return int'(s / longint'(W * H));
  endfunction

  // expected accepted events of the current image, raster order
  function automatic void expect_events(int frame, int sx, int sy, bit specials, int keep);
    int k, id;
    k = 0; id = 0;
    for (int y = 4; y <= H - 5; y += sy)
      for (int x = 4; x <= W - 5; x += sx) begin
        if (!(specials && (k == 1 || (k == 2 && x + 2 <= W - 3)))) begin
          if (id < keep) begin
            exp_ev_t e;
            int l, r, t, b, s;
            l = at(y, x - 1); r = at(y, x + 1); t = at(y - 1, x); b = at(y + 1, x);
            s = 0;
            for (int dy = -2; dy <= 2; dy++)
              for (int dx = -2; dx <= 2; dx++) s += at(y + dy, x + dx);
            e.frame = frame; e.id = id; e.x = x; e.y = y;
            e.xnr = (r >= l) ? r - l : l - r; e.xflag = (l > r);
            e.ynr = (b >= t) ? b - t : t - b; e.yflag = (t > b);
            e.inten = at(y, x); e.sum = s;
            expq.push_back(e);
          end
          id++;
        end
        k++;
      end
  endfunction

  task automatic send_frame();
    fv = 1;
    repeat (3) @(negedge clk);
    for (int r = 0; r < H; r++) begin
      for (int c = 0; c < W; c++) begin
        lv = 1; pix_in = img[r * W + c];
        @(negedge clk);
      end
      lv = 0; pix_in = 0;
      repeat (8) @(negedge clk);
    end
    fv = 0;
    repeat (60) @(negedge clk);
  endtask

  function automatic logic [63:0] pack(exp_ev_t e);
    logic [55:0] p;
    int xf, yf;
    xf = (e.xnr * 16) / e.sum; if (xf > 15) xf = 15;
    yf = (e.ynr * 16) / e.sum; if (yf > 15) yf = 15;
    p = {7'(e.frame), 8'(e.id), 11'(e.x), 4'(xf), 1'(e.xflag), 10'(e.y), 4'(yf), 1'(e.yflag), 10'(e.inten)};
    return {p, 8'h00};
  endfunction

  task automatic wait_drained();
    int idle;
    idle = 0;
    while (idle < 50) begin
      @(negedge clk);
      if (acquiring && !tx_valid) idle++; else idle = 0;
    end
  endtask

  initial begin
    int m1, m2, keep3, nexp;
    img = new[W * H];
    rst_n = 0; fv = 0; lv = 0; pix_in = 0; start = 0;
    mode = MODE_CENTROID; thr_mode = 0; thr_prog = PROG_THR; thr_offset = OFFSET;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);

    // frame 1: programmed threshold, hot pixel and multiple event
    m1 = build(1, 16, 16, 1);
    expect_events(1, 16, 16, 1, 1 << 30);
    send_frame();
    checks++;
    if (threshold != PROG_THR) begin failures++; $display("FAIL programmed threshold %0d", threshold); end

    // frame 2: dynamic threshold from frame 1
    thr_mode = 1;
    #1;
    checks++;
    if (threshold != pix_t'(m1 + int'(OFFSET))) begin
      failures++; $display("FAIL dynamic threshold %0d exp %0d", threshold, m1 + OFFSET);
    end else n_dyn++;
    m2 = build(2, 16, 16, 0);
    expect_events(2, 16, 16, 0, 1 << 30);
    send_frame();

    checks++;
    if (threshold != pix_t'(m2 + int'(OFFSET))) begin
      failures++; $display("FAIL dynamic threshold 2 %0d exp %0d", threshold, m2 + OFFSET);
    end else n_dyn++;

    // frame 3: SDRAM held busy, dense events, buffer overflows
    void'(build(3, 6, 8, 0));
    keep3 = FIFO_DEPTH + 1;
    expect_events(3, 6, 8, 0, keep3);
    hold = 1;
    send_frame();
    hold = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (int'(stored) != expq.size()) begin
      failures++; $display("FAIL stored %0d exp %0d", stored, expq.size());
    end

    // read back and check the packets, last stored first
    start = 1; @(negedge clk); start = 0;
    repeat (5) @(negedge clk);
    wait_drained();
    nexp = expq.size();
    checks++;
    if (records.size() != nexp) begin failures++; $display("FAIL records %0d exp %0d", records.size(), nexp); end
    while (records.size() > 0 && expq.size() > 0) begin
      exp_ev_t e;
      logic [63:0] got;
      int len;
      e = expq.pop_back();
      got = records.pop_front();
      len = rec_len.pop_front();
      checks++;
      if (got != pack(e) || len != 7) begin
        failures++;
        $display("FAIL packet f%0d e%0d (%0d,%0d): got %h exp %h len %0d", e.frame, e.id, e.x, e.y, got, pack(e), len);
      end
    end
    checks++;
    if (stored != 0) begin failures++; $display("FAIL stored after drain %0d", stored); end

    // frame 4: frame-transfer mode
    if (FRAME_TEST) begin
      mode = MODE_FRAME;
      stall_en = 0;
      start = 1; @(negedge clk); start = 0;
      repeat (5) @(negedge clk);
      void'(build(4, 16, 16, 0));
      send_frame();
      checks++;
      if (int'(stored) != W * H || drop_count != 0) begin
        failures++; $display("FAIL frame words stored %0d drops %0d", stored, drop_count);
      end
      mode = MODE_CENTROID;
      records.delete(); rec_len.delete();
      start = 1; @(negedge clk); start = 0;
      repeat (5) @(negedge clk);
      wait_drained();
      checks++;
      if (records.size() != W * H) begin failures++; $display("FAIL frame words back %0d", records.size()); end
      for (int i = W * H - 1; i >= 0 && records.size() > 0; i--) begin
        logic [63:0] got;
        logic [15:0] expw;
        got = records.pop_front();
        expw = {(i == 0), 5'b0, img[i]};
        if (got[63:48] != expw || rec_len.pop_front() != 2) begin
          failures++;
          if (failures < 10) $display("FAIL frame word %0d got %h exp %h", i, got[63:48], expw);
        end
      end
      checks++;
    end

    // every mechanism must have happened
    $display("mechanisms: events=%0d hot=%0d multi=%0d overflow=%0d dyn_thr=%0d sdram_writes=%0d sdram_reads=%0d",
             event_count, hot_count, multi_count, overflow_count, n_dyn, writes, reads);
    checks += 5;
    if (event_count == 0)    begin failures++; $display("FAIL no events"); end
    if (hot_count == 0)      begin failures++; $display("FAIL no hot pixel"); end
    if (multi_count == 0)    begin failures++; $display("FAIL no multiple event"); end
    if (overflow_count == 0) begin failures++; $display("FAIL no buffer overflow"); end
    if (n_dyn != 2)          begin failures++; $display("FAIL dynamic threshold not used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
