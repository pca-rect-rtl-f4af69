// tb_count_matrix: random cell addresses (some repeated, some at the 7-bit
// wrap) pushed through a window of s = 12 events; after every update the
// whole neighbourhood in use is read through the k-d tree port and compared
// with a model of the last s addresses.  Checks the update latency (2
// cycles from accept to upd_done, 4 when the window is full), that the
// matrix stays locked until release, and that the window filled.
module tb_count_matrix;
  import pcarect_pkg::*;
  localparam int S = 12;
  localparam int CW = $clog2(S + 1);
  logic clk = 0, rst_n = 0;
  logic upd_valid = 0, upd_ready, upd_done, release_i = 0, window_full, busy_init;
  logic [CELL_AW-1:0] upd_addr, rd_addr;
  logic [CW-1:0] rd_data;
  int checks = 0, failures = 0;
  logic [CELL_AW-1:0] hist[$];
  int model [logic [CELL_AW-1:0]];
  logic [CELL_AW-1:0] pool [8] = '{14'h0000, 14'h0001, 14'h0080, 14'h3fff, 14'h1234, 14'h1235, 14'h12b4, 14'h0101};
  int full_seen = 0;

  count_matrix #(.WIN_S(S)) dut (.*);
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
    rd_addr = '0; upd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (!busy_init);
    @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      automatic logic [CELL_AW-1:0] a = pool[$urandom_range(0, 7)];
      automatic bit was_full = (hist.size() == S);
      int lat;
      check(upd_ready, "ready before update");
      upd_valid = 1; upd_addr = a;
      @(negedge clk);
      upd_valid = 0;
      lat = 1;
      while (!upd_done) begin @(negedge clk); lat++; end
      check(lat == (was_full ? 4 : 2), $sformatf("update latency %0d", lat));
      if (was_full) begin
        automatic logic [CELL_AW-1:0] o = hist.pop_front();
        model[o]--;
        full_seen++;
      end
      hist.push_back(a);
      if (!model.exists(a)) model[a] = 0;
      model[a]++;
      @(negedge clk);
      check(!upd_ready, "locked after update");
      check(window_full == (hist.size() == S), "window_full");
      // read every address of the pool
      for (int k = 0; k < 8; k++) begin
        automatic int e = model.exists(pool[k]) ? model[pool[k]] : 0;
        rd_addr = pool[k];
        @(negedge clk);
        check(int'(rd_data) == e, $sformatf("cell %h = %0d exp %0d", pool[k], rd_data, e));
      end
      rd_addr = 14'h2222;   // never written: must read zero
      @(negedge clk);
      check(rd_data == 0, "unwritten cell is zero");
      release_i = 1;
      @(negedge clk);
      release_i = 0;
    end
    check(full_seen > 0, "window filled and oldest events popped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
