// event_filter: refractory filter followed by a nearest-neighbour temporal
// filter on the raw event stream.
//
// A per-pixel memory keeps the timestamp of the last event seen at every
// pixel (with a valid bit; 2^16 words addressed by {y, x}).  For each input
// event the own pixel and its eight neighbours are read, one per cycle:
//   * refractory: the event is dropped if its own pixel fired less than
//     THETA_REF ago (passes when t - t_last > THETA_REF, or no event yet);
//   * noise: a surviving event is kept only if at least one of the eight
//     neighbours fired less than THETA_NOISE ago (t - t_nb < THETA_NOISE).
// Every raw event, kept or not, then stores its timestamp at its pixel.
// Neighbours outside the 240 x 180 sensor count as silent.
//
// Interface: valid/ready on both sides; in_ready is high only in IDLE.
// Timing: after reset the memory is swept clear (65536 cycles, busy_init
// high, in_ready low).  Each event then takes 12 cycles to decide
// (accept, 9 reads plus one cycle of read latency, write) plus the cycles
// out_valid waits for out_ready.
//
// The filter equations, the eight-connected neighbourhood and the 5 ms / 1 ms
// thresholds follow the design description; the shared timestamp memory,
// the sequential neighbour reads and the clear sweep are this design's own.
module event_filter
  import pcarect_pkg::*;
#(
  parameter int unsigned THETA_NOISE_US = pcarect_pkg::THETA_NOISE,
  parameter int unsigned THETA_REF_US   = pcarect_pkg::THETA_REF,
  parameter int unsigned SENSOR_COLS    = pcarect_pkg::SENSOR_W,
  parameter int unsigned SENSOR_ROWS    = pcarect_pkg::SENSOR_H
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  event_t      in_ev,
  output logic        out_valid,
  input  logic        out_ready,
  output event_t      out_ev,
  output logic        busy_init,
  output logic [31:0] n_ref_drop,
  output logic [31:0] n_noise_drop
);
  localparam int unsigned MAW = 2 * COORD_W;

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_READ, S_WRITE, S_OUT} state_t;
  state_t state;

  typedef struct packed {
    logic            valid;
    logic [TS_W-1:0] ts;
  } ts_entry_t;

  ts_entry_t      mem [2**MAW];
  ts_entry_t      mem_q;
  logic [MAW-1:0] rd_addr, wr_addr, init_addr;
  logic           wr_en;
  ts_entry_t      wr_data;

  event_t         ev;
  logic [3:0]     k;          // neighbour being addressed (0 = own pixel)
  logic           q_inrange;  // in-range flag of the word arriving on mem_q
  logic           ref_ok, nb_hit;

  // Offset of neighbour k: 0 is the pixel itself, 1..8 the ring around it.
  function automatic logic signed [1:0] dx_of(input logic [3:0] kk);
    case (kk)
      4'd1, 4'd4, 4'd6: return -2'sd1;
      4'd3, 4'd5, 4'd8: return  2'sd1;
      default:          return  2'sd0;
    endcase
  endfunction
  function automatic logic signed [1:0] dy_of(input logic [3:0] kk);
    case (kk)
      4'd1, 4'd2, 4'd3: return -2'sd1;
      4'd6, 4'd7, 4'd8: return  2'sd1;
      default:          return  2'sd0;
    endcase
  endfunction

  // Address and range check of neighbour k of the held event.
  logic signed [COORD_W+1:0] nx, ny;
  logic                      nb_inrange;
  always_comb begin
    nx = $signed({2'b00, ev.x}) + (COORD_W+2)'(dx_of(k));
    ny = $signed({2'b00, ev.y}) + (COORD_W+2)'(dy_of(k));
    nb_inrange = (nx >= 0) && (nx < $signed((COORD_W+2)'(SENSOR_COLS))) &&
                 (ny >= 0) && (ny < $signed((COORD_W+2)'(SENSOR_ROWS)));
    rd_addr = {ny[COORD_W-1:0], nx[COORD_W-1:0]};
  end

  // Timestamp memory: one synchronous read port, one write port.
  always_ff @(posedge clk) begin
    mem_q <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_comb begin
    wr_en   = 1'b0;
    wr_addr = {ev.y, ev.x};
    wr_data = '{valid: 1'b1, ts: ev.t};
    if (state == S_INIT) begin
      wr_en   = 1'b1;
      wr_addr = init_addr;
      wr_data = '0;
    end else if (state == S_WRITE) begin
      wr_en   = 1'b1;
    end
  end

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_OUT);
  assign out_ev    = ev;
  assign busy_init = (state == S_INIT);

  logic [TS_W-1:0] age;
  assign age = ev.t - mem_q.ts;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_INIT;
      init_addr    <= '0;
      ev           <= '0;
      k            <= '0;
      q_inrange    <= 1'b0;
      ref_ok       <= 1'b0;
      nb_hit       <= 1'b0;
      n_ref_drop   <= '0;
      n_noise_drop <= '0;
    end else begin
      case (state)
        S_INIT: begin
          init_addr <= init_addr + 1'b1;
          if (init_addr == '1) state <= S_IDLE;
        end
        S_IDLE: if (in_valid) begin
          ev     <= in_ev;
          k      <= '0;
          ref_ok <= 1'b1;
          nb_hit <= 1'b0;
          state  <= S_READ;
        end
        S_READ: begin
          // mem_q holds the word addressed in the previous cycle (k-1).
          q_inrange <= nb_inrange;
          if (k != 0 && q_inrange && mem_q.valid) begin
            if (k == 4'd1) begin
              if (age <= TS_W'(THETA_REF_US)) ref_ok <= 1'b0;
            end else if (age < TS_W'(THETA_NOISE_US)) begin
              nb_hit <= 1'b1;
            end
          end
          k <= k + 1'b1;
          if (k == 4'd9) state <= S_WRITE;
        end
        S_WRITE: begin
          if (!ref_ok)      begin n_ref_drop   <= n_ref_drop + 1;   state <= S_IDLE; end
          else if (!nb_hit) begin n_noise_drop <= n_noise_drop + 1; state <= S_IDLE; end
          else              state <= S_OUT;
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
