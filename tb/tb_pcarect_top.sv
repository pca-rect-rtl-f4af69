// tb_pcarect_top: end-to-end run of the whole pipeline at its full default
// sizes (s = 5000 event window, 950-word tree of 1899 nodes, S = 10^5 event
// classification / detection window).
//
// Tables: a random tree with balanced splits (10 comparisons deep, random
// split dimensions of the 7 x 7 patch and random split values), random
// signed SVM weights and 20 random landmark words are loaded first.
// Stimulus: an "object" blob of events around a slowly moving centre plus
// uniformly scattered noise events, 1-4 us apart, until a little more than
// 10^5 events have passed the filters.
//
// A reference model in this file repeats every step (filters, sub-sampling,
// count window, tree descent, running class sums, landmark heat map, mean)
// and checks, per event: the leaf index, the class sums, class_id and
// class_flag, and the latency from the address leaving the buffer to the
// leaf (3 * D + 5 cycles, + 2 with a full window; at most 55 cycles =
// 550 ns at 100 MHz); per window: the detected location; at the end: the
// filter drop counters.  Every mechanism must have happened at least once:
// refractory drops, noise drops, address-buffer stalls, window pops, class
// FIFO subtraction, new heat-map maxima (FIFO reset), ties (FIFO push
// without reset), window end with a detection and the heat-map clear stall.
module tb_pcarect_top;
  import pcarect_pkg::*;
  localparam int SUM_W = WEIGHT_W + $clog2(CLASS_S + 1) + 1;
  localparam int TARGET = CLASS_S + 600;

  logic clk = 0, rst_n = 0;
  logic ev_valid = 0, ev_ready;
  event_t ev;
  logic node_ld_en = 0, w_ld_en = 0, lm_ld_en = 0, lm_ld_bit = 0;
  logic [PTR_W-1:0] node_ld_addr;
  kd_node_t node_ld_data;
  logic [IDX_W-1:0] w_ld_addr, lm_ld_addr;
  logic [NUM_CLASSES-1:0][WEIGHT_W-1:0] w_ld_data;
  logic init_busy, leaf_valid, class_valid, class_flag, det_done, det_valid, det_overflow;
  logic window_full, class_fifo_full;
  logic [IDX_W-1:0] leaf_index;
  logic [$clog2(NUM_CLASSES)-1:0] class_id;
  logic signed [SUM_W-1:0] class_sums [NUM_CLASSES];
  logic [COORD_W-1:0] det_x, det_y;
  logic [31:0] n_ref_drop, n_noise_drop, n_buf_stall;

  pcarect_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // ---------------- tables ----------------
  kd_node_t tree [NUM_NODES];
  int next_free;
  int w [DICT_K][NUM_CLASSES];
  bit lm [DICT_K];

  function automatic void build(int slot, int n, ref int leaf_id);
    kd_node_t nd;
    nd = '0;
    if (n == 1) begin
      nd.is_leaf = 1; nd.index = IDX_W'(leaf_id); leaf_id++;
      tree[slot] = nd;
    end else begin
      int nl = n / 2;
      int l = next_free, r = next_free + 1;
      next_free += 2;
      nd.left = PTR_W'(l); nd.right = PTR_W'(r);
      nd.dim = DIM_W'($urandom_range(0, PATCH * PATCH - 1));
      nd.threshold = THR_W'($urandom_range(2, 30));
      tree[slot] = nd;
      build(l, nl, leaf_id);
      build(r, n - nl, leaf_id);
    end
  endfunction

  // ---------------- reference model ----------------
  bit          seen [256][256];
  int unsigned last_t [256][256];
  int          cmat [2**CELL_AW];
  int          win_q [$];
  typedef struct { int x; int y; } xy_t;
  xy_t         filt_q [$];
  int          cls_q [$];
  longint      rsum [NUM_CLASSES];
  int          hm [int];
  int          thr = 0;
  int          mfifo [$];
  int          n_leaf = 0, exp_ref = 0, exp_noise = 0, n_filtered = 0;
  typedef struct { longint s[NUM_CLASSES]; int cid; bit flag; } cls_exp_t;
  cls_exp_t    cls_exp [$];
  typedef struct { bit v; int x; int y; } det_exp_t;
  det_exp_t    det_exp [$];
  // mechanism counters
  int m_pop = 0, m_sub = 0, m_newmax = 0, m_tie = 0, m_det = 0, m_det_valid = 0, m_clear_stall = 0;
  int max_lat = 0, max_depth = 0;

  function automatic bit ref_filter(event_t e, output bit refd);
    bit nb = 0;
    refd = seen[e.y][e.x] && (e.t - last_t[e.y][e.x] <= THETA_REF);
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++) begin
        int nx = int'(e.x) + dx, ny = int'(e.y) + dy;
        if ((dx != 0 || dy != 0) && nx >= 0 && ny >= 0 && nx < SENSOR_W && ny < SENSOR_H)
          if (seen[ny][nx] && (e.t - last_t[ny][nx] < THETA_NOISE)) nb = 1;
      end
    seen[e.y][e.x] = 1;
    last_t[e.y][e.x] = e.t;
    return !refd && nb;
  endfunction

  function automatic int cell_of(int x, int y);
    return ((((y >> 1) + 2) % 128) << 7) | (((x >> 1) + 2) % 128);
  endfunction

  function automatic int elem(int c, int d);
    int ys = ((c >> 7) + d / PATCH - PATCH / 2 + 128) % 128;
    int xs = ((c & 127) + d % PATCH - PATCH / 2 + 128) % 128;
    return (ys << 7) | xs;
  endfunction

  function automatic int descend(int c, output int depth);
    int n = 0;
    depth = 0;
    while (!tree[n].is_leaf) begin
      n = (cmat[elem(c, int'(tree[n].dim))] <= int'(tree[n].threshold)) ? int'(tree[n].left) : int'(tree[n].right);
      depth++;
    end
    return int'(tree[n].index);
  endfunction

  // ---------------- monitors ----------------
  longint cyc = 0, pop_cyc = 0;
  bit     prev_leaf = 0, pop_full = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      // filter input handshake
      if (ev_valid && ev_ready) begin
        bit refd;
        if (ref_filter(ev, refd)) begin
          xy_t p; p.x = int'(ev.x); p.y = int'(ev.y);
          filt_q.push_back(p);
          n_filtered++;
        end else if (refd) exp_ref++;
        else exp_noise++;
      end
      if (dut.b_pop) begin pop_cyc = cyc; pop_full = window_full; end
      if (dut.u_heat.busy_clear && dut.b_pop == 0 && n_leaf > 0) m_clear_stall++;
      // one leaf per event
      if (leaf_valid && !prev_leaf) begin
        xy_t p;
        int c, depth, idx, lat;
        cls_exp_t ce;
        if (filt_q.size() == 0) check(0, "leaf without event");
        else begin
          p = filt_q.pop_front();
          c = cell_of(p.x, p.y);
          if (win_q.size() == WINDOW_S) begin cmat[win_q.pop_front()]--; m_pop++; end
          win_q.push_back(c);
          cmat[c]++;
          idx = descend(c, depth);
          if (depth > max_depth) max_depth = depth;
          lat = int'(cyc - pop_cyc);
          if (lat > max_lat) max_lat = lat;
          check(lat == 3 * depth + 5 + (pop_full ? 2 : 0), $sformatf("latency %0d depth %0d", lat, depth));
          check(lat <= 55, "latency within 550 ns at 100 MHz");
          check(int'(leaf_index) == idx, $sformatf("event %0d leaf %0d exp %0d", n_leaf, leaf_index, idx));
          // classifier
          if (cls_q.size() == CLASS_S) begin
            automatic int o = cls_q.pop_front();
            for (int k = 0; k < NUM_CLASSES; k++) rsum[k] -= w[o][k];
            m_sub++;
          end
          cls_q.push_back(idx);
          for (int k = 0; k < NUM_CLASSES; k++) rsum[k] += w[idx][k];
          ce.cid = 0;
          for (int k = 0; k < NUM_CLASSES; k++) begin
            ce.s[k] = rsum[k];
            if (rsum[k] > rsum[ce.cid]) ce.cid = k;
          end
          ce.flag = ((n_leaf % CLASS_S) == CLASS_S - 1);
          cls_exp.push_back(ce);
          // detector
          if (lm[idx]) begin
            automatic int a = (p.y << 8) | p.x;
            if (!hm.exists(a)) hm[a] = 0;
            hm[a]++;
            if (hm[a] > thr) begin thr++; mfifo.delete(); m_newmax++; end
            else if (hm[a] == thr) m_tie++;
            if (hm[a] == thr && mfifo.size() < MEAN_DEPTH) mfifo.push_back(a);
          end
          if (ce.flag) begin
            det_exp_t de;
            automatic longint sx = 0, sy = 0;
            foreach (mfifo[i]) begin sx += mfifo[i] & 255; sy += mfifo[i] >> 8; end
            de.v = mfifo.size() > 0;
            de.x = de.v ? int'(sx / mfifo.size()) : 0;
            de.y = de.v ? int'(sy / mfifo.size()) : 0;
            det_exp.push_back(de);
            hm.delete(); thr = 0; mfifo.delete();
          end
          n_leaf++;
        end
      end
      prev_leaf = leaf_valid;
      if (class_valid) begin
        cls_exp_t ce;
        if (cls_exp.size() == 0) check(0, "class output without event");
        else begin
          ce = cls_exp.pop_front();
          for (int k = 0; k < NUM_CLASSES; k++)
            check(longint'(class_sums[k]) == ce.s[k], $sformatf("sum[%0d] %0d exp %0d", k, class_sums[k], ce.s[k]));
          check(int'(class_id) == ce.cid, "class_id");
          check(class_flag == ce.flag, "class_flag");
        end
      end
      if (det_done) begin
        det_exp_t de;
        m_det++;
        if (det_exp.size() == 0) check(0, "detection without window end");
        else begin
          de = det_exp.pop_front();
          check(det_valid == de.v, "det_valid");
          if (de.v) begin
            m_det_valid++;
            check(int'(det_x) == de.x && int'(det_y) == de.y,
                  $sformatf("detection (%0d,%0d) exp (%0d,%0d)", det_x, det_y, de.x, de.y));
            $display("window detection at (%0d, %0d)", det_x, det_y);
          end
        end
      end
    end
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog: %0d events through the tree", n_leaf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  initial begin
    int leaf_id = 0;
    int unsigned t = 100;
    real cx = 60.0, cy = 50.0, vx = 0.004, vy = 0.003;
    next_free = 1;
    build(0, DICT_K, leaf_id);
    for (int k = 0; k < DICT_K; k++) begin
      for (int c = 0; c < NUM_CLASSES; c++) w[k][c] = $urandom_range(0, 2000) - 1000;
      lm[k] = 0;
    end
    for (int i = 0; i < 20; i++) lm[$urandom_range(0, DICT_K - 1)] = 1;
    ev = '0; node_ld_addr = '0; node_ld_data = '0; w_ld_addr = '0; w_ld_data = '0; lm_ld_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NUM_NODES; i++) begin
      @(negedge clk); node_ld_en = 1; node_ld_addr = PTR_W'(i); node_ld_data = tree[i];
    end
    @(negedge clk) node_ld_en = 0;
    for (int k = 0; k < DICT_K; k++) begin
      @(negedge clk);
      w_ld_en = 1; w_ld_addr = IDX_W'(k);
      for (int c = 0; c < NUM_CLASSES; c++) w_ld_data[c] = WEIGHT_W'(w[k][c]);
      lm_ld_en = 1; lm_ld_addr = IDX_W'(k); lm_ld_bit = lm[k];
    end
    @(negedge clk) begin w_ld_en = 0; lm_ld_en = 0; end
    wait (!init_busy);
    while (n_filtered < TARGET) begin
      event_t e;
      int px, py;
      t += $urandom_range(1, 4);
      cx += vx; cy += vy;
      if (cx < 20 || cx > 220) vx = -vx;
      if (cy < 20 || cy > 160) vy = -vy;
      if ($urandom_range(0, 9) == 0) begin
        px = $urandom_range(0, SENSOR_W - 1); py = $urandom_range(0, SENSOR_H - 1);
      end else begin
        px = int'(cx) + $urandom_range(0, 24) - 12;
        py = int'(cy) + $urandom_range(0, 24) - 12;
      end
      e.x = COORD_W'(px); e.y = COORD_W'(py); e.t = t;
      @(negedge clk);
      ev_valid = 1; ev = e;
      @(posedge clk);
      while (!ev_ready) @(posedge clk);
      #1 ev_valid = 0;
    end
    // drain
    for (int i = 0; i < 200000 && (filt_q.size() > 0 || cls_exp.size() > 0 || det_exp.size() > 0); i++)
      @(posedge clk);
    repeat (100) @(posedge clk);
    check(filt_q.size() == 0 && cls_exp.size() == 0 && det_exp.size() == 0, "all results delivered");
    check(n_ref_drop == exp_ref, $sformatf("refractory drops %0d exp %0d", n_ref_drop, exp_ref));
    check(n_noise_drop == exp_noise, $sformatf("noise drops %0d exp %0d", n_noise_drop, exp_noise));
    $display("events through tree %0d, deepest path %0d comparisons, worst latency %0d cycles",
             n_leaf, max_depth, max_lat);
    $display("mechanisms: refractory_drop=%0d noise_drop=%0d buffer_stall=%0d window_pop=%0d class_sub=%0d new_max=%0d tie=%0d window_end=%0d detections=%0d clear_stall=%0d",
             exp_ref, exp_noise, n_buf_stall, m_pop, m_sub, m_newmax, m_tie, m_det, m_det_valid, m_clear_stall);
    check(exp_ref > 0, "refractory filter dropped events");
    check(exp_noise > 0, "noise filter dropped events");
    check(n_buf_stall > 0, "address buffer stalled the filter");
    check(m_pop > 0, "event window popped");
    check(m_sub > 0, "classifier subtracted the oldest index");
    check(m_newmax > 0, "heat map found new maxima");
    check(m_tie > 0, "heat map pushed ties");
    check(m_det > 0 && m_det_valid > 0, "a window ended with a detection");
    check(m_clear_stall > 0, "heat-map clear stalled the pipeline");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
