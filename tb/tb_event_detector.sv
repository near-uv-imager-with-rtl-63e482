// tb_event_detector: presents hand-built windows, one per case, and checks
// the decision and the record:
//   a Gaussian-like spot (accepted, all fields checked), a lone hot pixel
//   (rejected, hot), a spot below threshold, a centre that is not the
//   maximum, a spot with a second peak on the outer ring (rejected, multi),
//   plateau ties before and after the centre, and event ID numbering that
//   restarts at frame_start.
module tb_event_detector;
  import centroid_pkg::*;

  logic clk = 0, rst_n = 0;
  logic frame_start = 0;
  logic [FRAME_ID_W-1:0] frame_id = 5;
  logic win_valid = 0;
  window_t win;
  logic [X_W-1:0] cx = 7;
  logic [Y_W-1:0] cy = 25;
  pix_t threshold = 5;
  logic ev_valid, hot, multi;
  raw_event_t ev;
  int checks = 0, failures = 0;

  event_detector dut (.*);

  always #5 clk = ~clk;

  // background 2, spot 37 at centre falling off with distance
  task automatic make_spot();
    for (int i = 0; i < 5; i++)
      for (int j = 0; j < 5; j++) begin
        int d;
        d = (i - 2) * (i - 2) + (j - 2) * (j - 2);
        win[i][j] = (d == 0) ? 37 : (d == 1) ? 20 : (d == 2) ? 12 : 2;
      end
  endtask

  // apply one window and return what came out
  task automatic apply(output logic v, output logic h, output logic m, output raw_event_t e);
    @(negedge clk);
    win_valid = 1;
    @(negedge clk);
    win_valid = 0;
    v = ev_valid; h = hot; m = multi; e = ev;
  endtask

  task automatic expect_out(string name, logic v, logic h, logic m, logic ev_exp, logic h_exp, logic m_exp);
    checks++;
    if (v !== ev_exp || h !== h_exp || m !== m_exp) begin
      failures++;
      $display("FAIL %s: ev=%0b hot=%0b multi=%0b exp %0b %0b %0b", name, v, h, m, ev_exp, h_exp, m_exp);
    end
  endtask

  initial begin
    logic v, h, m;
    raw_event_t e;
    win = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    frame_start = 1; @(negedge clk); frame_start = 0;

    // 1. spot, asymmetric: left 30, right 18, top 20, bottom 26
    make_spot();
    win[2][1] = 30; win[2][3] = 18; win[3][2] = 26;
    apply(v, h, m, e);
    expect_out("spot", v, h, m, 1, 0, 0);
    checks++;
    if (e.frame_id != 5 || e.event_id != 0 || e.xc_int != 7 || e.yc_int != 25 ||
        e.xc_nr != 12 || e.xc_flag != 1 || e.yc_nr != 6 || e.yc_flag != 0 ||
        e.intensity != 37 || e.sum_intensity != SUM_W'(37 + 30 + 18 + 20 + 26 + 4 * 12 + 16 * 2)) begin
      failures++; $display("FAIL spot record %p", e);
    end

    // 2. hot pixel: lone bright pixel, neighbours at threshold
    win = '0;
    for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) win[i][j] = 5;
    win[2][2] = 600;
    apply(v, h, m, e);
    expect_out("hot", v, h, m, 0, 1, 0);

    // 3. spot below threshold
    make_spot();
    threshold = 40;
    apply(v, h, m, e);
    expect_out("below", v, h, m, 0, 0, 0);
    threshold = 5;

    // 4. not a local maximum
    make_spot();
    win[3][3] = 50;
    apply(v, h, m, e);
    expect_out("notmax", v, h, m, 0, 0, 0);

    // 5. second peak on the outer ring: [0][4] = 30 > inner [1][3] = 12
    make_spot();
    win[0][4] = 30;
    apply(v, h, m, e);
    expect_out("multi", v, h, m, 0, 0, 1);

    // 5b. outer ring above threshold but falling: still one event
    make_spot();
    win[0][4] = 10;
    apply(v, h, m, e);
    expect_out("falling", v, h, m, 1, 0, 0);
    checks++;
    if (e.event_id != 1) begin failures++; $display("FAIL event id %0d exp 1", e.event_id); end

    // 6. plateau: equal pixel after the centre -> accepted here
    make_spot();
    win[2][3] = 37;
    apply(v, h, m, e);
    expect_out("tie_after", v, h, m, 1, 0, 0);
    // equal pixel before the centre -> the earlier pixel owns the event
    make_spot();
    win[2][1] = 37;
    apply(v, h, m, e);
    expect_out("tie_before", v, h, m, 0, 0, 0);

    // 7. window not valid: nothing
    make_spot();
    @(negedge clk);
    checks++;
    if (ev_valid) begin failures++; $display("FAIL output without window"); end

    // 8. new frame restarts event IDs
    frame_id = 6;
    frame_start = 1; @(negedge clk); frame_start = 0;
    apply(v, h, m, e);
    expect_out("newframe", v, h, m, 1, 0, 0);
    checks++;
    if (e.event_id != 0 || e.frame_id != 6) begin failures++; $display("FAIL new frame ids %0d %0d", e.frame_id, e.event_id); end
    apply(v, h, m, e);
    checks++;
    if (e.event_id != 1) begin failures++; $display("FAIL second id %0d", e.event_id); end

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
