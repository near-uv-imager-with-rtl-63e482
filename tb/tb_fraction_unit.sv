// tb_fraction_unit: three instances, FRAC_W = 4 (7-byte packet), 6 and 8
// (8-byte packets). For the packet example of the design
// (frame 5, event 1, Xc 7 with numerator 12 and flag 1, Yc 25 with
// numerator 6 and flag 0, intensity 37, sum 289) and 300 random events,
// each field of the final packet is compared with floor(nr * 2^F / sum)
// and the input fields, and out_valid must rise PIX_W + FRAC_W + 2 clocks
// after the event is accepted.
module tb_fraction_unit;
  import centroid_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  raw_event_t in_ev;
  logic rdy4, rdy6, rdy8, v4, v6, v8;
  logic [63:0] p4, p6, p8;
  logic [3:0] b4, b6, b8;
  logic out_ready = 0;
  int checks = 0, failures = 0;

  fraction_unit #(.FRAC_W(4)) dut4 (.clk, .rst_n, .in_valid, .in_ready(rdy4), .in_ev,
    .out_valid(v4), .out_ready, .out_pkt(p4), .out_bytes(b4));
  fraction_unit #(.FRAC_W(6)) dut6 (.clk, .rst_n, .in_valid, .in_ready(rdy6), .in_ev,
    .out_valid(v6), .out_ready, .out_pkt(p6), .out_bytes(b6));
  fraction_unit #(.FRAC_W(8)) dut8 (.clk, .rst_n, .in_valid, .in_ready(rdy8), .in_ev,
    .out_valid(v8), .out_ready, .out_pkt(p8), .out_bytes(b8));

  always #5 clk = ~clk;

  function automatic logic [63:0] expect_pkt(raw_event_t e, int f);
    logic [63:0] p;
    longint xf, yf;
    int pos;
    xf = (longint'(e.xc_nr) << f) / longint'(e.sum_intensity);
    yf = (longint'(e.yc_nr) << f) / longint'(e.sum_intensity);
    if (xf >= (64'd1 << f)) xf = (64'd1 << f) - 1;
    if (yf >= (64'd1 << f)) yf = (64'd1 << f) - 1;
    p = '0;
    pos = 64;
    pos -= 7;  p |= 64'(e.frame_id) << pos;
    pos -= 8;  p |= 64'(e.event_id) << pos;
    pos -= 11; p |= 64'(e.xc_int) << pos;
    pos -= f;  p |= 64'(xf) << pos;
    pos -= 1;  p |= 64'(e.xc_flag) << pos;
    pos -= 10; p |= 64'(e.yc_int) << pos;
    pos -= f;  p |= 64'(yf) << pos;
    pos -= 1;  p |= 64'(e.yc_flag) << pos;
    pos -= 10; p |= 64'(e.intensity) << pos;
    return p;
  endfunction

  task automatic run(raw_event_t e);
    int n;
    in_ev = e; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    n = 1;
    while (!v4 && n < 100) begin @(negedge clk); n++; end
    checks += 3;
    if (n != PIX_W + 4 + 2) begin failures++; $display("FAIL latency4 %0d", n); end
    if (p4 != expect_pkt(e, 4)) begin failures++; $display("FAIL pkt4 %h exp %h", p4, expect_pkt(e, 4)); end
    if (b4 != 7) begin failures++; $display("FAIL bytes4 %0d", b4); end
    while (!v6 && n < 100) begin @(negedge clk); n++; end
    checks += 3;
    if (n != PIX_W + 6 + 2) begin failures++; $display("FAIL latency6 %0d", n); end
    if (p6 != expect_pkt(e, 6)) begin failures++; $display("FAIL pkt6 %h exp %h", p6, expect_pkt(e, 6)); end
    if (b6 != 8) begin failures++; $display("FAIL bytes6 %0d", b6); end
    while (!v8 && n < 100) begin @(negedge clk); n++; end
    checks += 3;
    if (n != PIX_W + 8 + 2) begin failures++; $display("FAIL latency8 %0d", n); end
    if (p8 != expect_pkt(e, 8)) begin failures++; $display("FAIL pkt8 %h exp %h", p8, expect_pkt(e, 8)); end
    if (b8 != 8) begin failures++; $display("FAIL bytes8 %0d", b8); end
    out_ready = 1; @(negedge clk); out_ready = 0;
    checks++;
    if (!rdy4 || !rdy6 || !rdy8 || v4 || v6 || v8) begin failures++; $display("FAIL not idle after output"); end
  endtask

  initial begin
    raw_event_t e;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    e.frame_id = 5; e.event_id = 1; e.xc_int = 7; e.xc_nr = 12; e.xc_flag = 1;
    e.yc_int = 25; e.yc_nr = 6; e.yc_flag = 0; e.intensity = 37; e.sum_intensity = 289;
    run(e);
    // 12/289 = 0.042: 0 in 4 bits, 10/256 in 8 bits
    checks++;
    if (p8[64-7-8-11-8 +: 8] != 8'd10) begin failures++; $display("FAIL example 8-bit fraction"); end
    for (int t = 0; t < 300; t++) begin
      e = raw_event_t'({$urandom, $urandom, $urandom});
      e.sum_intensity = SUM_W'($urandom_range(1, 25 * 1023));
      if (t % 2 == 0) begin
        e.xc_nr = PIX_W'($urandom_range(0, int'(e.sum_intensity) > 1023 ? 1023 : int'(e.sum_intensity) - 1));
        e.yc_nr = PIX_W'($urandom_range(0, int'(e.sum_intensity) > 1023 ? 1023 : int'(e.sum_intensity) - 1));
      end
      run(e);
    end
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
