// mean_calc: mean location of the most activated pixels.
//
// A FIFO collects the coordinates pushed by the heat map (it is emptied
// whenever a new maximum appears, so it only holds pixels at the current
// maximum count).  On `start` (end of the detection window) the FIFO is
// drained one entry per cycle while the entries are counted (divisor) and
// their x and y summed (dividends); two sequential dividers then produce
// the mean x and y, truncated to integers.  An empty FIFO gives
// det_valid = 0.  A push into a full FIFO is dropped and raises `overflow`
// until the next start.
//
// Interface: fifo_rst / fifo_push / fifo_x / fifo_y from the heat map,
// start in, done pulse out with det_valid, det_x, det_y held until the next
// result.  Timing: 1 + N cycles to drain N entries, then DW + 1 cycles of
// division (DW = divider width), then done.
//
// The FIFO, the count/sum/divide scheme and the two dividers follow the
// design description; the FIFO depth, truncating division and the overflow
// handling are this design's choices.
module mean_calc
  import pcarect_pkg::*;
#(
  parameter int unsigned DEPTH = pcarect_pkg::MEAN_DEPTH,
  parameter int unsigned DW    = COORD_W + $clog2(DEPTH + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               fifo_rst,
  input  logic               fifo_push,
  input  logic [COORD_W-1:0] fifo_x,
  input  logic [COORD_W-1:0] fifo_y,
  input  logic               start,
  output logic               done,
  output logic               det_valid,
  output logic [COORD_W-1:0] det_x,
  output logic [COORD_W-1:0] det_y,
  output logic               overflow,
  output logic [$clog2(DEPTH+1)-1:0] n_points
);
  typedef enum logic [1:0] {S_IDLE, S_DRAIN, S_DIV, S_DONE} state_t;
  state_t state;

  logic                         f_full, f_empty, f_pop;
  logic [HM_AW-1:0]             f_dout;
  logic [$clog2(DEPTH+1)-1:0]   f_count, n;
  logic [DW-1:0]                sum_x, sum_y;
  logic                         dx_done, dy_done, dx_busy, dy_busy, div_start;
  logic [DW-1:0]                qx, qy, rx, ry;
  logic                         got_x, got_y;

  sync_fifo #(.WIDTH(HM_AW), .DEPTH(DEPTH)) u_coord_fifo (
    .clk, .rst_n, .clr(fifo_rst),
    .push(fifo_push && (fifo_rst || !f_full)), .din({fifo_y, fifo_x}),
    .pop(f_pop), .dout(f_dout),
    .full(f_full), .empty(f_empty), .count(f_count)
  );

  assign f_pop     = (state == S_DRAIN) && !f_empty;
  assign div_start = (state == S_DRAIN) && f_empty && (n != 0);

  seq_divider #(.W(DW)) u_div_x (
    .clk, .rst_n, .start(div_start), .dividend(sum_x), .divisor(DW'(n)),
    .busy(dx_busy), .done(dx_done), .quotient(qx), .remainder(rx)
  );
  seq_divider #(.W(DW)) u_div_y (
    .clk, .rst_n, .start(div_start), .dividend(sum_y), .divisor(DW'(n)),
    .busy(dy_busy), .done(dy_done), .quotient(qy), .remainder(ry)
  );

  assign done     = (state == S_DONE);
  assign n_points = n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      n         <= '0;
      sum_x     <= '0;
      sum_y     <= '0;
      det_valid <= 1'b0;
      det_x     <= '0;
      det_y     <= '0;
      overflow  <= 1'b0;
      got_x     <= 1'b0;
      got_y     <= 1'b0;
    end else begin
      if (fifo_push && !fifo_rst && f_full) overflow <= 1'b1;
      case (state)
        S_IDLE: if (start) begin
          n        <= '0;
          sum_x    <= '0;
          sum_y    <= '0;
          got_x    <= 1'b0;
          got_y    <= 1'b0;
          state    <= S_DRAIN;
        end
        S_DRAIN: begin
          if (!f_empty) begin
            n     <= n + 1'b1;
            sum_x <= sum_x + DW'(f_dout[COORD_W-1:0]);
            sum_y <= sum_y + DW'(f_dout[HM_AW-1:COORD_W]);
          end else if (n == 0) begin
            det_valid <= 1'b0;
            state     <= S_DONE;
          end else begin
            state <= S_DIV;
          end
        end
        S_DIV: begin
          if (dx_done) begin det_x <= COORD_W'(qx); got_x <= 1'b1; end
          if (dy_done) begin det_y <= COORD_W'(qy); got_y <= 1'b1; end
          if ((got_x || dx_done) && (got_y || dy_done)) begin
            det_valid <= 1'b1;
            state     <= S_DONE;
          end
        end
        S_DONE: begin
          overflow <= 1'b0;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
