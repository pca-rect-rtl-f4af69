// count_matrix: the sub-sampled event-count matrix R and its s-event window.
//
// R is a RAM of 2^14 words (one per 14-bit cell address {y_sub, x_sub}) of
// CNT_W = ceil(log2(s+1)) bits, cleared after reset.  Every cell holds the
// number of the last s filtered events that fell into its 2 x 2 pixel
// cell, which is the 2 x 2 equal-weight (sum) pooling of the pixel counts.
// An s-deep FIFO remembers the cell of each of those events.  An update
//   1. if the FIFO holds s entries: pops the oldest cell and decrements it,
//   2. increments the new cell and pushes its address into the FIFO,
// each step a two-cycle read-modify-write on the single RAM port.
//
// After an update the matrix is locked: upd_ready stays low and the read
// port belongs to the k-d tree (rd_addr -> rd_data one cycle later) until
// `release` is pulsed, i.e. until the tree's leaf has been taken.  This is
// what keeps the descriptor stable during the tree walk.
//
// Timing: upd_done pulses 2 cycles after the accepting cycle, 4 when the
// window is full (pop read, pop write, push read, push write);
// the RAM holds the new value on
// the next cycle.  The clear sweep after reset takes 2^14 cycles.
//
// The window size s = 5000, the log(s)-bit word, the zero start and the
// increment/decrement rule follow the design description; the lock/release
// handshake and the storage of cell addresses in the FIFO are this design's.
module count_matrix
  import pcarect_pkg::*;
#(
  parameter int unsigned WIN_S = pcarect_pkg::WINDOW_S,
  parameter int unsigned CW    = $clog2(WIN_S + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               upd_valid,
  output logic               upd_ready,
  input  logic [CELL_AW-1:0] upd_addr,
  output logic               upd_done,
  input  logic               release_i,
  input  logic [CELL_AW-1:0] rd_addr,
  output logic [CW-1:0]      rd_data,
  output logic               window_full,
  output logic               busy_init
);
  typedef enum logic [2:0] {S_INIT, S_IDLE, S_POP_RD, S_POP_WR, S_INC_RD, S_INC_WR} state_t;
  state_t state;

  logic [CW-1:0]      ram [2**CELL_AW];
  logic [CW-1:0]      ram_q;
  logic [CELL_AW-1:0] ram_addr, new_addr, old_addr, init_addr;
  logic               ram_we;
  logic [CW-1:0]      ram_wd;
  logic               locked;

  logic                   f_push, f_pop, f_full, f_empty;
  logic [CELL_AW-1:0]     f_dout;
  logic [$clog2(WIN_S+1)-1:0] f_count;

  sync_fifo #(.WIDTH(CELL_AW), .DEPTH(WIN_S)) u_window (
    .clk, .rst_n, .clr(1'b0),
    .push(f_push), .din(new_addr),
    .pop(f_pop), .dout(f_dout),
    .full(f_full), .empty(f_empty), .count(f_count)
  );

  always_comb begin
    ram_we   = 1'b0;
    ram_wd   = ram_q;
    ram_addr = rd_addr;
    case (state)
      S_INIT:   begin ram_we = 1'b1; ram_addr = init_addr; ram_wd = '0; end
      S_POP_RD: ram_addr = f_dout;
      S_POP_WR: begin ram_we = 1'b1; ram_addr = old_addr; ram_wd = ram_q - 1'b1; end
      S_INC_RD: ram_addr = new_addr;
      S_INC_WR: begin ram_we = 1'b1; ram_addr = new_addr; ram_wd = ram_q + 1'b1; end
      default:  ;
    endcase
  end

  always_ff @(posedge clk) begin
    ram_q <= ram[ram_addr];
    if (ram_we) ram[ram_addr] <= ram_wd;
  end

  assign f_pop       = (state == S_POP_RD);
  assign f_push      = (state == S_INC_WR);
  assign upd_ready   = (state == S_IDLE) && !locked;
  assign upd_done    = (state == S_INC_WR);
  assign rd_data     = ram_q;
  assign window_full = f_full;
  assign busy_init   = (state == S_INIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_INIT;
      init_addr <= '0;
      new_addr  <= '0;
      old_addr  <= '0;
      locked    <= 1'b0;
    end else begin
      case (state)
        S_INIT: begin
          init_addr <= init_addr + 1'b1;
          if (init_addr == '1) state <= S_IDLE;
        end
        S_IDLE: begin
          if (locked) begin
            if (release_i) locked <= 1'b0;
          end else if (upd_valid) begin
            new_addr <= upd_addr;
            state    <= f_full ? S_POP_RD : S_INC_RD;
          end
        end
        S_POP_RD: begin old_addr <= f_dout; state <= S_POP_WR; end
        S_POP_WR: state <= S_INC_RD;
        S_INC_RD: state <= S_INC_WR;
        S_INC_WR: begin locked <= 1'b1; state <= S_IDLE; end
        default:  state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && state == S_POP_WR) assert (ram_q != '0) else $error("count_matrix: decrement of empty cell");
  end
endmodule
