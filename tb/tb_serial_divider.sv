// tb_serial_divider: self-checking test of the restoring divider.
// Random operands, plus edge cases (zero dividend, divisor 1, divisor 0,
// divisor larger than dividend), are compared with the / and % operators;
// done must rise N_W + 1 clocks after start is raised (one clock to load,
// one per quotient bit).
module tb_serial_divider;
  localparam int N_W = 14;
  localparam int D_W = 15;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [N_W-1:0] dividend;
  logic [D_W-1:0] divisor;
  logic busy, done;
  logic [N_W-1:0] quotient;
  logic [D_W-1:0] remainder;
  int checks = 0, failures = 0;

  serial_divider #(.N_W(N_W), .D_W(D_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic run(input logic [N_W-1:0] a, input logic [D_W-1:0] b);
    int cycles;
    logic [N_W-1:0] eq;
    logic [D_W-1:0] er;
    @(negedge clk);
    dividend = a; divisor = b; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    if (b == 0) begin eq = '1; er = 'x; end
    else begin eq = a / N_W'(b); er = D_W'(a % N_W'(b)); end
    if (b > D_W'({N_W{1'b1}})) begin eq = 0; er = D_W'(a); end
    checks++;
    if (quotient !== eq) begin
      failures++; $display("FAIL %0d/%0d q=%0d exp %0d", a, b, quotient, eq);
    end
    if (b != 0) begin
      checks++;
      if (remainder !== er) begin
        failures++; $display("FAIL %0d %% %0d r=%0d exp %0d", a, b, remainder, er);
      end
    end
    checks++;
    if (cycles != N_W + 1) begin
      failures++; $display("FAIL cycles %0d exp %0d", cycles, N_W + 1);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(12 << 4, 289);   // packet example: 12/289 -> 0.0000 in 4 bits (0.042)
    run(200 << 4, 289);
    run(0, 5);
    run(14'h3fff, 1);
    run(100, 0);
    run(5, 20000);
    for (int i = 0; i < 300; i++) run(N_W'($urandom), D_W'($urandom_range(1, 32767)));
    for (int i = 0; i < 200; i++) run(N_W'($urandom), D_W'($urandom_range(1, 300)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
