// tb_landmark_detector: loads a random landmark bit map over 950 words and
// sends random (index, x, y, last) events with random output back-pressure.
// Each output must carry hit = bit[index], addr = {y, x} and the same last
// flag, in order, with no loss or duplication.
module tb_landmark_detector;
  import pcarect_pkg::*;
  localparam int K = DICT_K;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, out_hit, out_last;
  logic [IDX_W-1:0] in_index, lm_ld_addr;
  logic [COORD_W-1:0] in_x, in_y;
  logic [HM_AW-1:0] out_addr;
  logic lm_ld_en = 0, lm_ld_bit = 0;
  int checks = 0, failures = 0, hits = 0;
  bit lm [K];
  logic [HM_AW+1:0] expq[$];

  landmark_detector dut (.*);
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

  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (expq.size() == 0) check(0, "unexpected output");
    else begin
      automatic logic [HM_AW+1:0] e = expq.pop_front();
      check({out_hit, out_last, out_addr} == e, $sformatf("got %b %b %h exp %h", out_hit, out_last, out_addr, e));
      if (out_hit) hits++;
    end
  end

  initial begin
    in_index = '0; in_x = '0; in_y = '0; lm_ld_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) begin
      @(negedge clk);
      lm[k] = ($urandom_range(0, 99) < 20);
      lm_ld_en = 1; lm_ld_addr = IDX_W'(k); lm_ld_bit = lm[k];
    end
    @(negedge clk) lm_ld_en = 0;
    for (int i = 0; i < 1000; i++) begin
      automatic int idx = $urandom_range(0, K - 1);
      @(negedge clk);
      in_valid = 1; in_index = IDX_W'(idx);
      in_x = COORD_W'($urandom_range(0, 239)); in_y = COORD_W'($urandom_range(0, 179));
      in_last = ($urandom_range(0, 9) == 0);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      expq.push_back({lm[idx], in_last, in_y, in_x});
      #1 in_valid = 0;
    end
    repeat (20) @(posedge clk);
    check(expq.size() == 0, "all delivered");
    check(hits > 0, "landmark hits seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
