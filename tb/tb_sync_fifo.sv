// tb_sync_fifo: random push/pop/clear traffic against a queue model.
// Checks head word, full, empty and count every cycle, including a push in
// the same cycle as a clear and push+pop on a full queue.
module tb_sync_fifo;
  localparam int W = 12, D = 8;
  logic clk = 0, rst_n = 0, clr = 0, push = 0, pop = 0;
  logic [W-1:0] din;
  logic [W-1:0] dout;
  logic full, empty;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      // compare state against the model
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == D), "full");
      check(count == q.size(), "count");
      if (q.size() > 0) check(dout == q[0], $sformatf("dout %h exp %h", dout, q[0]));
      clr  = ($urandom_range(0, 99) == 0);
      push = ($urandom_range(0, 99) < (i % 400 < 200 ? 70 : 30));
      pop  = ($urandom_range(0, 99) < (i % 400 < 200 ? 30 : 70)) && !empty;
      if (full && push && $urandom_range(0, 1)) pop = 1;   // push + pop while full
      if (full && !pop) push = 0;
      din  = W'($urandom);
      @(posedge clk);
      #1;
      if (clr) begin
        q.delete();
        if (push) q.push_back(din);
      end else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    push = 0; pop = 0; clr = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
