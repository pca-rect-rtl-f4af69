// pcarect_top: event-by-event object categorisation and detection.
//
// Data flow for every camera event (x, y, t):
//   event_filter   refractory + nearest-neighbour filtering of raw events;
//   subsample      pixel -> 14-bit cell address of the 2 x 2-pooled matrix;
//   addr buffer    16-deep FIFO that holds cell addresses back while the
//                  matrix is locked by a running tree walk;
//   count_matrix   +1 on the new cell, -1 on the cell that leaves the
//                  s = 5000 event window, then locked for the tree;
//   kdtree_search  walks the tree stored in kd_node_rom, reading only the
//                  descriptor elements the visited nodes need, and returns
//                  the dictionary word (leaf index) of the event;
// then, in parallel, for each leaf index:
//   svm_classifier running per-class sums over the last S = 10^5 events;
//   landmark_detector -> heat_map -> mean_calc: landmark events raise a
//                  per-pixel count, the pixels at the maximum count are kept
//                  in a FIFO and, every S events, their mean position is
//                  output as the object location.
// The matrix is released (and the next address taken from the buffer) when
// both back ends have accepted the leaf index.
//
// Tables learned offline (tree nodes, SVM weights, landmark bits) are loaded
// through the *_ld_* ports while no events are sent.  `init_busy` is high
// while the internal memories are being cleared after reset (2^16 cycles);
// events are only accepted afterwards (ev_ready).
//
// Outputs: leaf_valid/leaf_index per event, class_valid/class_id/class_sums
// per event, class_flag every S events, det_done/det_valid/det_x/det_y once
// per S-event window, and event counters for the filters and stalls.
module pcarect_top
  import pcarect_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  // camera events
  input  logic                           ev_valid,
  output logic                           ev_ready,
  input  event_t                         ev,
  // table loading
  input  logic                           node_ld_en,
  input  logic [PTR_W-1:0]               node_ld_addr,
  input  kd_node_t                       node_ld_data,
  input  logic                           w_ld_en,
  input  logic [IDX_W-1:0]               w_ld_addr,
  input  logic [NUM_CLASSES-1:0][WEIGHT_W-1:0] w_ld_data,
  input  logic                           lm_ld_en,
  input  logic [IDX_W-1:0]               lm_ld_addr,
  input  logic                           lm_ld_bit,
  // status
  output logic                           init_busy,
  // per-event results
  output logic                           leaf_valid,
  output logic [IDX_W-1:0]               leaf_index,
  output logic                           class_valid,
  output logic [$clog2(NUM_CLASSES)-1:0] class_id,
  output logic signed [WEIGHT_W+$clog2(CLASS_S+1):0] class_sums [NUM_CLASSES],
  output logic                           class_flag,
  // per-window detection result
  output logic                           det_done,
  output logic                           det_valid,
  output logic [COORD_W-1:0]             det_x,
  output logic [COORD_W-1:0]             det_y,
  output logic                           det_overflow,
  // counters
  output logic [31:0]                    n_ref_drop,
  output logic [31:0]                    n_noise_drop,
  output logic [31:0]                    n_buf_stall,
  output logic                           window_full,
  output logic                           class_fifo_full
);
  localparam int unsigned BUF_DEPTH = 16;
  localparam int unsigned BUF_W     = CELL_AW + 2 * COORD_W;
  localparam int unsigned WCNT_W    = $clog2(CLASS_S);

  // ---- filter -------------------------------------------------------------
  logic   f_valid, f_ready, f_init;
  event_t f_ev;

  event_filter u_filter (
    .clk, .rst_n,
    .in_valid(ev_valid), .in_ready(ev_ready), .in_ev(ev),
    .out_valid(f_valid), .out_ready(f_ready), .out_ev(f_ev),
    .busy_init(f_init), .n_ref_drop, .n_noise_drop
  );

  // ---- sub-sampling + address buffer --------------------------------------
  logic [CELL_AW-1:0] sub_addr;
  subsample u_sub (.x(f_ev.x), .y(f_ev.y), .addr(sub_addr));

  logic               b_full, b_empty, b_pop;
  logic [BUF_W-1:0]   b_dout;
  logic [$clog2(BUF_DEPTH+1)-1:0] b_count;

  assign f_ready = !b_full;

  sync_fifo #(.WIDTH(BUF_W), .DEPTH(BUF_DEPTH)) u_addr_buffer (
    .clk, .rst_n, .clr(1'b0),
    .push(f_valid && f_ready), .din({sub_addr, f_ev.y, f_ev.x}),
    .pop(b_pop), .dout(b_dout),
    .full(b_full), .empty(b_empty), .count(b_count)
  );

  // ---- count matrix ---------------------------------------------------------
  logic               cm_ready, cm_done, cm_init, leaf_take;
  logic [CELL_AW-1:0] cm_rd_addr, center;
  logic [CNT_W-1:0]   cm_rd_data;
  logic [COORD_W-1:0] cur_x, cur_y;

  assign b_pop = !b_empty && cm_ready;

  count_matrix u_count (
    .clk, .rst_n,
    .upd_valid(!b_empty), .upd_ready(cm_ready), .upd_addr(b_dout[BUF_W-1:2*COORD_W]),
    .upd_done(cm_done), .release_i(leaf_take),
    .rd_addr(cm_rd_addr), .rd_data(cm_rd_data),
    .window_full, .busy_init(cm_init)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      center <= '0;
      cur_x  <= '0;
      cur_y  <= '0;
    end else if (b_pop) begin
      center <= b_dout[BUF_W-1:2*COORD_W];
      cur_y  <= b_dout[2*COORD_W-1:COORD_W];
      cur_x  <= b_dout[COORD_W-1:0];
    end
  end

  // ---- k-d tree ---------------------------------------------------------------
  logic [PTR_W-1:0] node_addr;
  kd_node_t         node_q;
  logic             kd_busy, kd_leaf_valid, leaf_ready;
  logic [IDX_W-1:0] kd_leaf_index;

  kd_node_rom u_rom (
    .clk, .addr(node_addr), .q(node_q),
    .ld_en(node_ld_en), .ld_addr(node_ld_addr), .ld_data(node_ld_data)
  );

  kdtree_search u_tree (
    .clk, .rst_n, .start(cm_done), .center, .busy(kd_busy),
    .node_addr, .node_q, .cm_addr(cm_rd_addr), .cm_data(cm_rd_data),
    .leaf_valid(kd_leaf_valid), .leaf_ready, .leaf_index(kd_leaf_index)
  );

  assign leaf_valid = kd_leaf_valid;
  assign leaf_index = kd_leaf_index;

  // ---- S-event window counter -------------------------------------------------
  logic              svm_ready, lm_ready, last;
  logic [WCNT_W-1:0] win_cnt;

  assign leaf_ready = svm_ready && lm_ready;
  assign leaf_take  = kd_leaf_valid && leaf_ready;
  assign last       = (win_cnt == WCNT_W'(CLASS_S - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         win_cnt <= '0;
    else if (leaf_take) win_cnt <= last ? '0 : win_cnt + 1'b1;
  end

  // ---- classifier ---------------------------------------------------------------
  svm_classifier u_svm (
    .clk, .rst_n,
    .in_valid(leaf_take), .in_ready(svm_ready), .in_index(kd_leaf_index), .in_last(last),
    .w_ld_en, .w_ld_addr, .w_ld_data,
    .sums(class_sums), .class_id, .out_valid(class_valid), .class_flag,
    .fifo_full(class_fifo_full)
  );

  // ---- detector -----------------------------------------------------------------
  logic               lm_valid, lm_hit, lm_last, hm_ready, hm_init;
  logic [HM_AW-1:0]   lm_addr;
  logic               fifo_rst, fifo_push, mean_start, mean_done;
  logic [COORD_W-1:0] fifo_x, fifo_y;
  logic [$clog2(CLASS_S+1)-1:0] hm_threshold;
  logic [31:0]        hm_new_max;
  logic [$clog2(MEAN_DEPTH+1)-1:0] mean_points;

  landmark_detector u_landmark (
    .clk, .rst_n,
    .in_valid(leaf_take), .in_ready(lm_ready), .in_index(kd_leaf_index),
    .in_x(cur_x), .in_y(cur_y), .in_last(last),
    .out_valid(lm_valid), .out_ready(hm_ready), .out_hit(lm_hit),
    .out_addr(lm_addr), .out_last(lm_last),
    .lm_ld_en, .lm_ld_addr, .lm_ld_bit
  );

  heat_map u_heat (
    .clk, .rst_n,
    .in_valid(lm_valid), .in_ready(hm_ready), .in_hit(lm_hit), .in_addr(lm_addr), .in_last(lm_last),
    .fifo_rst, .fifo_push, .fifo_x, .fifo_y, .mean_start, .mean_done,
    .threshold(hm_threshold), .busy_clear(hm_init), .n_new_max(hm_new_max)
  );

  mean_calc u_mean (
    .clk, .rst_n,
    .fifo_rst, .fifo_push, .fifo_x, .fifo_y,
    .start(mean_start), .done(mean_done),
    .det_valid, .det_x, .det_y, .overflow(det_overflow), .n_points(mean_points)
  );

  assign det_done  = mean_done;
  assign init_busy = f_init || cm_init || hm_init;

  // ---- stall counter: filtered events held back by a full address buffer --
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                n_buf_stall <= '0;
    else if (f_valid && b_full) n_buf_stall <= n_buf_stall + 1;
  end
endmodule
