// svm_classifier: linear classifier over the last S events, one addition
// per event.
//
// A linear SVM scores a window of S events by the dot product of its
// weights with the histogram of dictionary words in the window.  Since the
// histogram changes by +1 for the new word and -1 for the word that leaves
// the window, the score vector is kept as a running sum: each event adds the
// weight row of its word (one weight per class) and, once the S-deep index
// FIFO is full, subtracts the weight row of the word that drops out.  The
// sums therefore always equal the SVM scores of the latest S events and the
// class with the largest sum is the decision.
//
// Interface: in_valid/in_ready with the leaf index and the window-end flag
// `in_last`; out_valid pulses when sums and class_id are updated
// (class_flag additionally when in_last was set).  The weight table is
// written through the w_ld_* port before use.
// Timing: 4 cycles per event (accept, weight read, add, finish), 5 once the
// FIFO is full (one more for the subtraction); in_ready is high only when
// idle.
//
// The running sum, the S-deep index FIFO and the subtraction of the oldest
// index follow the design description; weight width, signed arithmetic,
// argmax with the lowest class winning ties and the absence of a bias term
// are this design's choices.
module svm_classifier
  import pcarect_pkg::*;
#(
  parameter int unsigned NC    = pcarect_pkg::NUM_CLASSES,
  parameter int unsigned K     = pcarect_pkg::DICT_K,
  parameter int unsigned S     = pcarect_pkg::CLASS_S,
  parameter int unsigned WW    = pcarect_pkg::WEIGHT_W,
  parameter int unsigned SUM_W = WW + $clog2(S + 1) + 1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  output logic                                in_ready,
  input  logic [IDX_W-1:0]                    in_index,
  input  logic                                in_last,
  input  logic                                w_ld_en,
  input  logic [IDX_W-1:0]                    w_ld_addr,
  input  logic [NC-1:0][WW-1:0]               w_ld_data,
  output logic signed [SUM_W-1:0]             sums [NC],
  output logic [$clog2(NC)-1:0]               class_id,
  output logic                                out_valid,
  output logic                                class_flag,
  output logic                                fifo_full
);
  typedef enum logic [2:0] {S_IDLE, S_RD, S_ADD, S_SUB, S_FIN} state_t;
  state_t state;

  logic [NC-1:0][WW-1:0] wmem [K];
  logic [NC-1:0][WW-1:0] w_q;
  logic [IDX_W-1:0]      w_addr, new_idx, old_idx;
  logic                  has_old, last_r;

  logic                  f_full, f_empty;
  logic [IDX_W-1:0]      f_dout;
  logic [$clog2(S+1)-1:0] f_count;
  logic                  accept;

  assign in_ready = (state == S_IDLE);
  assign accept   = in_valid && in_ready;

  sync_fifo #(.WIDTH(IDX_W), .DEPTH(S)) u_idx_fifo (
    .clk, .rst_n, .clr(1'b0),
    .push(accept), .din(in_index),
    .pop(accept && f_full), .dout(f_dout),
    .full(f_full), .empty(f_empty), .count(f_count)
  );
  assign fifo_full = f_full;

  assign w_addr = (state == S_ADD) ? old_idx : new_idx;

  always_ff @(posedge clk) begin
    if (w_ld_en && w_ld_addr < IDX_W'(K)) wmem[w_ld_addr] <= w_ld_data;
    w_q <= (w_addr < IDX_W'(K)) ? wmem[w_addr] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      new_idx <= '0;
      old_idx <= '0;
      has_old <= 1'b0;
      last_r  <= 1'b0;
      for (int c = 0; c < NC; c++) sums[c] <= '0;
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          new_idx <= in_index;
          old_idx <= f_dout;
          has_old <= f_full;
          last_r  <= in_last;
          state   <= S_RD;
        end
        S_RD:  state <= S_ADD;
        S_ADD: begin
          for (int c = 0; c < NC; c++) sums[c] <= sums[c] + SUM_W'($signed(w_q[c]));
          state <= has_old ? S_SUB : S_FIN;
        end
        S_SUB: begin
          for (int c = 0; c < NC; c++) sums[c] <= sums[c] - SUM_W'($signed(w_q[c]));
          state <= S_FIN;
        end
        S_FIN:   state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign out_valid  = (state == S_FIN);
  assign class_flag = out_valid && last_r;

  always_comb begin
    class_id = '0;
    for (int c = 1; c < NC; c++)
      if (sums[c] > sums[class_id]) class_id = ($clog2(NC))'(c);
  end
endmodule
