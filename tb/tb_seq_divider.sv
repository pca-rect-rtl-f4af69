// tb_seq_divider: random and corner-case divisions against the `/` and `%`
// operators; checks the latency of W + 1 cycles from start to done.
module tb_seq_divider;
  localparam int W = 20;
  logic clk = 0, rst_n = 0, start = 0;
  logic [W-1:0] dividend, divisor, quotient, remainder;
  logic busy, done;
  int checks = 0, failures = 0;

  seq_divider #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [W-1:0] a, input logic [W-1:0] b);
    int lat;
    @(negedge clk);
    dividend = a; divisor = b; start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks += 3;
    if (lat != W + 1) begin failures++; $display("FAIL latency %0d", lat); end
    if (b == 0) begin
      if (quotient != '1) begin failures++; $display("FAIL div0"); end
    end else begin
      if (quotient != a / b) begin failures++; $display("FAIL %0d/%0d = %0d", a, b, quotient); end
      if (remainder != a % b) begin failures++; $display("FAIL %0d%%%0d = %0d", a, b, remainder); end
    end
  endtask

  initial begin
    dividend = '0; divisor = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(100, 7); run(0, 5); run(5, 1); run('1, 1); run('1, '1); run(3, 9); run(7, 0);
    for (int i = 0; i < 500; i++) run(W'($urandom), W'($urandom_range(1, 1 << ($urandom_range(1, W-1)))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
