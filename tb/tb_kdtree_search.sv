// tb_kdtree_search: a random, unbalanced tree of 120 leaves is held in a
// kd_node_rom; a model count matrix (random counts, one-cycle read latency)
// answers the descriptor reads.  For random centre cells (including cells
// whose 7 x 7 patch wraps past address 0) the leaf index is compared with a
// software descent of the same tree, and the latency with 3 * D + 3 cycles
// for a path of D comparisons.  Also checks that leaf_valid holds until
// leaf_ready.
module tb_kdtree_search;
  import pcarect_pkg::*;
  localparam int LEAVES = 120;
  localparam int N = 2 * LEAVES - 1;
  logic clk = 0, rst_n = 0, start = 0, busy, leaf_valid, leaf_ready = 0;
  logic [CELL_AW-1:0] center, cm_addr;
  logic [CNT_W-1:0] cm_data;
  logic [PTR_W-1:0] node_addr, ld_addr;
  kd_node_t node_q, ld_data;
  logic ld_en = 0;
  logic [IDX_W-1:0] leaf_index;
  int checks = 0, failures = 0;

  kd_node_t tree [N];
  int       next_free = 0;
  logic [CNT_W-1:0] cm [2**CELL_AW];
  int max_depth = 0;

  kd_node_rom #(.NODES(N)) rom (.clk, .addr(node_addr), .q(node_q), .ld_en, .ld_addr, .ld_data);
  kdtree_search dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cm_data <= cm[cm_addr];

  // build a subtree with n leaves at node `slot`; returns nothing
  function automatic void build(int slot, int n, ref int leaf_id);
    kd_node_t nd;
    nd = '0;
    if (n == 1) begin
      nd.is_leaf = 1;
      nd.index   = IDX_W'(leaf_id);
      leaf_id++;
      tree[slot] = nd;
    end else begin
      int nl = $urandom_range(1, n - 1);
      int l = next_free, r = next_free + 1;
      next_free += 2;
      nd.left = PTR_W'(l); nd.right = PTR_W'(r);
      nd.dim = DIM_W'($urandom_range(0, PATCH * PATCH - 1));
      nd.threshold = THR_W'($urandom_range(0, 40));
      tree[slot] = nd;
      build(l, nl, leaf_id);
      build(r, n - nl, leaf_id);
    end
  endfunction

  function automatic logic [CELL_AW-1:0] elem(logic [CELL_AW-1:0] c, int d);
    logic [6:0] ys = c[13:7] + 7'(d / PATCH) - 7'(PATCH / 2);
    logic [6:0] xs = c[6:0] + 7'(d % PATCH) - 7'(PATCH / 2);
    return {ys, xs};
  endfunction

  function automatic int descend(logic [CELL_AW-1:0] c, output int depth);
    int n = 0;
    depth = 0;
    while (!tree[n].is_leaf) begin
      n = (cm[elem(c, int'(tree[n].dim))] <= CNT_W'(tree[n].threshold)) ? int'(tree[n].left) : int'(tree[n].right);
      depth++;
    end
    return int'(tree[n].index);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int leaf_id = 0;
    next_free = 1;
    build(0, LEAVES, leaf_id);
    for (int i = 0; i < 2**CELL_AW; i++) cm[i] = CNT_W'($urandom_range(0, 48));
    center = '0; ld_addr = '0; ld_data = '0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      ld_en = 1; ld_addr = PTR_W'(i); ld_data = tree[i];
    end
    @(negedge clk) ld_en = 0;
    rst_n = 1;
    for (int i = 0; i < 1500; i++) begin
      int exp_idx, depth, lat, hold;
      automatic logic [CELL_AW-1:0] c = CELL_AW'($urandom);
      if (i % 10 == 0) c = {7'($urandom_range(0, 2)), 7'($urandom_range(0, 2))};
      exp_idx = descend(c, depth);
      if (depth > max_depth) max_depth = depth;
      @(negedge clk);
      start = 1; center = c;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!leaf_valid) begin @(negedge clk); lat++; end
      check(lat == 3 * depth + 3, $sformatf("latency %0d for depth %0d", lat, depth));
      check(int'(leaf_index) == exp_idx, $sformatf("leaf %0d exp %0d", leaf_index, exp_idx));
      hold = $urandom_range(0, 3);
      repeat (hold) begin @(negedge clk); check(leaf_valid && int'(leaf_index) == exp_idx, "hold"); end
      leaf_ready = 1;
      @(negedge clk);
      leaf_ready = 0;
      check(!leaf_valid && !busy, "idle after leaf taken");
    end
    $display("deepest path: %0d comparisons", max_depth);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
