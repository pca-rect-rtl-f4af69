// tb_svm_classifier: 4 classes, 20 dictionary words, window S = 6.
// Random signed weights are loaded, then random word indices are sent.
// After every event the four sums must equal the sums of the weight rows
// of the last S indices (computed here from a queue), class_id must be the
// first largest sum, class_flag must follow in_last, and out_valid must
// come 3 cycles after the accepting cycle (4 once the index FIFO is full).
module tb_svm_classifier;
  import pcarect_pkg::*;
  localparam int NC = 4, K = 20, S = 6, WW = 16;
  localparam int SUM_W = WW + $clog2(S + 1) + 1;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, class_flag, fifo_full;
  logic [IDX_W-1:0] in_index, w_ld_addr;
  logic w_ld_en = 0;
  logic [NC-1:0][WW-1:0] w_ld_data;
  logic signed [SUM_W-1:0] sums [NC];
  logic [1:0] class_id;
  int checks = 0, failures = 0;
  int w [K][NC];
  int q[$];
  int sub_seen = 0;

  svm_classifier #(.NC(NC), .K(K), .S(S), .WW(WW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_index = '0; w_ld_addr = '0; w_ld_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) begin
      @(negedge clk);
      w_ld_en = 1; w_ld_addr = IDX_W'(k);
      for (int c = 0; c < NC; c++) begin
        w[k][c] = $urandom_range(0, 60000) - 30000;
        w_ld_data[c] = WW'(w[k][c]);
      end
    end
    @(negedge clk) w_ld_en = 0;
    for (int i = 0; i < 400; i++) begin
      int idx, lat, best;
      int es [NC];
      bit full_before, last;
      idx = $urandom_range(0, K - 1);
      last = ($urandom_range(0, 9) == 0);
      full_before = (q.size() == S);
      repeat ($urandom_range(0, 2)) @(negedge clk);
      check(in_ready, "ready when idle");
      in_valid = 1; in_index = IDX_W'(idx); in_last = last;
      @(negedge clk);
      in_valid = 0;
      lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      check(lat == (full_before ? 4 : 3), $sformatf("latency %0d", lat));
      if (full_before) begin void'(q.pop_front()); sub_seen++; end
      q.push_back(idx);
      for (int c = 0; c < NC; c++) begin
        es[c] = 0;
        foreach (q[j]) es[c] += w[q[j]][c];
        check(int'(sums[c]) == es[c], $sformatf("sum[%0d] %0d exp %0d", c, sums[c], es[c]));
      end
      best = 0;
      for (int c = 1; c < NC; c++) if (es[c] > es[best]) best = c;
      check(int'(class_id) == best, "class_id");
      check(class_flag == last, "class_flag");
      check(fifo_full == (q.size() == S), "fifo_full");
      @(negedge clk);
    end
    check(sub_seen > 0, "oldest index subtracted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
