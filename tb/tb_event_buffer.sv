// tb_event_buffer: pushes 200 numbered raw events in bursts while popping
// with a random ready, and checks that they come out complete and in order;
// then fills the buffer with ready low and checks that the pushes beyond
// DEPTH are counted as overflows and that the first DEPTH events survive.
module tb_event_buffer;
  import centroid_pkg::*;
  localparam int DEPTH = 4;

  logic clk = 0, rst_n = 0;
  logic push = 0, pop_ready = 0, pop_valid;
  raw_event_t din, dout;
  logic [15:0] overflow_count;
  logic [$clog2(DEPTH):0] level;
  int checks = 0, failures = 0;
  int sent = 0, got = 0;

  event_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  function automatic raw_event_t mk(int n);
    raw_event_t e;
    e = '0;
    e.event_id = EVENT_ID_W'(n);
    e.xc_int = X_W'(n * 3);
    e.sum_intensity = SUM_W'(n * 101);
    return e;
  endfunction

  always @(posedge clk) if (rst_n && pop_valid && pop_ready) begin
    checks++;
    if (dout != mk(got)) begin failures++; $display("FAIL got %0d", dout.event_id); end
    got++;
  end

  initial begin
    din = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin
        while (sent < 200) begin
          // never push when full and not popping (no loss in this phase)
          push = 0;
          if ($urandom_range(0, 1) && (level < DEPTH)) begin
            push = 1; din = mk(sent); sent++;
          end
          @(negedge clk);
        end
        push = 0;
      end
      begin
        repeat (2000) begin
          pop_ready = ($urandom_range(0, 2) != 0);
          @(negedge clk);
        end
      end
    join
    pop_ready = 0;
    checks++;
    if (got != 200 || overflow_count != 0) begin failures++; $display("FAIL got %0d ovf %0d", got, overflow_count); end

    // overflow
    got = 300;
    for (int i = 0; i < DEPTH + 3; i++) begin
      push = 1; din = mk(300 + i); @(negedge clk);
    end
    push = 0;
    checks++;
    if (overflow_count != 3 || level != DEPTH) begin
      failures++; $display("FAIL overflow %0d level %0d", overflow_count, level);
    end
    pop_ready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    checks++;
    if (got != 300 + DEPTH) begin failures++; $display("FAIL drained %0d", got - 300); end
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
