// tb_heat_map: three detection windows of random events on a 6 x 5 pixel
// patch (so counts tie often), about half of them landmark hits.  A model
// runs the detection algorithm (count, running maximum, FIFO reset on a
// new maximum, push on equality); the FIFO commands of the heat map are
// applied to a queue here and compared with the model's FIFO after every
// event.  At each window end mean_start must come, and after mean_done the
// map must be cleared (next window starts from zero, threshold 0).
module tb_heat_map;
  import pcarect_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_hit = 0, in_last = 0;
  logic [HM_AW-1:0] in_addr;
  logic fifo_rst, fifo_push, mean_start, mean_done = 0, busy_clear;
  logic [COORD_W-1:0] fifo_x, fifo_y;
  logic [$clog2(CLASS_S+1)-1:0] threshold;
  logic [31:0] n_new_max;
  int checks = 0, failures = 0;
  int D [logic [HM_AW-1:0]];
  int thr = 0, resets = 0, pushes = 0, starts = 0;
  logic [HM_AW-1:0] mq[$], dq[$];

  heat_map dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // apply the FIFO commands of the DUT to a queue
  always @(posedge clk) if (rst_n) begin
    if (fifo_rst) begin dq.delete(); resets++; end
    if (fifo_push) begin dq.push_back({fifo_y, fifo_x}); pushes++; end
    if (mean_start) starts++;
  end

  initial begin
    in_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (!busy_clear);
    for (int win = 0; win < 3; win++) begin
      D.delete(); thr = 0; mq.delete();
      for (int i = 0; i < 300; i++) begin
        logic [HM_AW-1:0] a;
        bit hit, last;
        a = {8'($urandom_range(10, 14)), 8'($urandom_range(200, 205))};
        hit = $urandom_range(0, 1);
        last = (i == 299);
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        in_valid = 1; in_hit = hit; in_addr = a; in_last = last;
        @(negedge clk);
        in_valid = 0;
        if (hit) begin
          if (!D.exists(a)) D[a] = 0;
          D[a]++;
          if (D[a] > thr) begin thr++; mq.delete(); end
          if (D[a] == thr) mq.push_back(a);
        end
        if (!last) begin
          while (!in_ready) @(negedge clk);
          check(dq == mq, $sformatf("win %0d event %0d fifo size %0d exp %0d", win, i, dq.size(), mq.size()));
          check(int'(threshold) == thr, "threshold");
        end
      end
      // window end: mean_start, then wait for mean_done
      repeat (4) @(negedge clk);
      check(starts == win + 1, "mean_start at window end");
      check(dq == mq, "fifo at window end");
      check(!in_ready, "stalled until mean done");
      mean_done = 1;
      @(negedge clk);
      mean_done = 0;
      @(negedge clk);
      check(busy_clear, "clear sweep after window");
      wait (!busy_clear);
      @(negedge clk);
      check(threshold == 0, "threshold cleared");
      dq.delete();
    end
    check(resets > 0 && pushes > 0, "resets and pushes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
