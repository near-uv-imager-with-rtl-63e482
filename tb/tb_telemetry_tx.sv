// tb_telemetry_tx: sends 200 records of 1 to 8 bytes with random gaps and a
// random tx_ready, and checks every byte (most significant first), the
// tx_last mark on each record's final byte and the total byte count.
module tb_telemetry_tx;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [63:0] in_data = 0;
  logic [3:0] in_bytes = 0;
  logic tx_valid, tx_ready = 0, tx_last;
  logic [7:0] tx_data;
  int checks = 0, failures = 0;
  logic [7:0] q [$];
  logic       ql [$];
  int nbytes = 0, expected = 0;

  telemetry_tx dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (tx_valid && tx_ready) begin
      logic [7:0] b;
      logic l;
      nbytes++;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL unexpected byte"); end
      else begin
        b = q.pop_front(); l = ql.pop_front();
        if (tx_data != b || tx_last != l) begin
          failures++; $display("FAIL byte %h/%0b exp %h/%0b", tx_data, tx_last, b, l);
        end
      end
    end
    tx_ready <= ($urandom_range(0, 3) != 0);
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      int n;
      n = $urandom_range(1, 8);
      in_data = {$urandom, $urandom};
      in_bytes = 4'(n);
      for (int k = 0; k < n; k++) begin
        q.push_back(in_data[63 - 8 * k -: 8]);
        ql.push_back(k == n - 1);
      end
      expected += n;
      in_valid = 1;
      // the record is taken by the first clock edge that sees in_ready high
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (40) @(negedge clk);
    checks++;
    if (nbytes != expected) begin failures++; $display("FAIL bytes %0d exp %0d", nbytes, expected); end
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
