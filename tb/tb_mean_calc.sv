// tb_mean_calc: FIFO depth 8.  Random rounds of pushes and resets (some
// rounds overflow the FIFO, one round is empty) followed by `start`.  The
// result must be the truncated mean of the coordinates the FIFO holds
// (the first 8 pushed after the last reset), det_valid must be 0 for an
// empty FIFO, and `overflow` must be set exactly when pushes were dropped.
module tb_mean_calc;
  import pcarect_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic fifo_rst = 0, fifo_push = 0, start = 0, done, det_valid, overflow;
  logic [COORD_W-1:0] fifo_x, fifo_y, det_x, det_y;
  logic [$clog2(DEPTH+1)-1:0] n_points;
  int checks = 0, failures = 0, ovf_rounds = 0;

  mean_calc #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fifo_x = '0; fifo_y = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 300; r++) begin
      int xs[$], ys[$];
      int n_ops, sx, sy;
      bit dropped;
      n_ops = (r == 5) ? 0 : $urandom_range(1, 14);
      dropped = 0;
      xs.delete(); ys.delete();
      for (int i = 0; i < n_ops; i++) begin
        bit rs;
        @(negedge clk);
        rs = ($urandom_range(0, 5) == 0);
        fifo_rst = rs; fifo_push = 1;
        fifo_x = COORD_W'($urandom); fifo_y = COORD_W'($urandom);
        if (rs) begin xs.delete(); ys.delete(); dropped = 0; end
        if (xs.size() < DEPTH) begin xs.push_back(fifo_x); ys.push_back(fifo_y); end
        else dropped = 1;
      end
      @(negedge clk);
      fifo_rst = 0; fifo_push = 0;
      // the overflow flag is sticky since the last start, a reset does not clear it
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      sx = 0; sy = 0;
      foreach (xs[i]) begin sx += xs[i]; sy += ys[i]; end
      check(det_valid == (xs.size() > 0), "det_valid");
      if (xs.size() > 0) begin
        check(int'(det_x) == sx / xs.size(), $sformatf("x %0d exp %0d", det_x, sx / xs.size()));
        check(int'(det_y) == sy / ys.size(), $sformatf("y %0d exp %0d", det_y, sy / ys.size()));
        check(int'(n_points) == xs.size(), "point count");
      end
      if (dropped) begin check(overflow, "overflow flagged"); ovf_rounds++; end
      @(negedge clk);
      check(!overflow, "overflow cleared after result");
    end
    check(ovf_rounds > 0, "overflow exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
