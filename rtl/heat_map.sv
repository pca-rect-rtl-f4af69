// heat_map: per-pixel count of landmark events and tracking of the most
// activated pixels during one detection window.
//
// A RAM of 2^16 words addressed by {y, x} holds D(y, x).  For every landmark
// event the pixel's count is incremented (read-modify-write) and compared
// with the running maximum `threshold`:
//   * count > threshold: threshold grows by one and the mean FIFO is reset;
//   * count == threshold (also right after such a growth): the coordinate
//     is pushed into the mean FIFO.
// The mean FIFO therefore always holds exactly the pixels that currently
// share the highest count.  When the event that closes the window arrives
// (in_last), the heat map starts the mean calculation, waits for it and then
// clears all counts and the threshold for the next window.
//
// Interface: valid/ready in; FIFO commands and mean_start out; mean_done in.
// Timing: 1 cycle for a non-landmark event, 3 for a landmark event
// (accept, read, write); at window end the clear sweep takes 2^16 cycles
// (in_ready low).  After reset the same sweep runs once.
//
// The count map, the threshold rule and the FIFO reset/push follow the
// detection algorithm of the design description; the clear sweep between
// windows and the 17-bit count are this design's choices.
module heat_map
  import pcarect_pkg::*;
#(
  parameter int unsigned CW = $clog2(pcarect_pkg::CLASS_S + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic               in_hit,
  input  logic [HM_AW-1:0]   in_addr,
  input  logic               in_last,
  output logic               fifo_rst,
  output logic               fifo_push,
  output logic [COORD_W-1:0] fifo_x,
  output logic [COORD_W-1:0] fifo_y,
  output logic               mean_start,
  input  logic               mean_done,
  output logic [CW-1:0]      threshold,
  output logic               busy_clear,
  output logic [31:0]        n_new_max
);
  typedef enum logic [2:0] {S_CLEAR, S_IDLE, S_RD, S_UPD, S_MEAN, S_WAIT} state_t;
  state_t state;

  logic [CW-1:0]    hm [2**HM_AW];
  logic [CW-1:0]    hm_q, d_new;
  logic [HM_AW-1:0] addr_r, clr_addr, ram_addr;
  logic             last_r, ram_we;
  logic [CW-1:0]    ram_wd;

  assign d_new = hm_q + 1'b1;

  always_comb begin
    ram_addr = addr_r;
    ram_we   = 1'b0;
    ram_wd   = d_new;
    if (state == S_CLEAR) begin
      ram_addr = clr_addr;
      ram_we   = 1'b1;
      ram_wd   = '0;
    end else if (state == S_UPD) begin
      ram_we   = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    hm_q <= hm[ram_addr];
    if (ram_we) hm[ram_addr] <= ram_wd;
  end

  assign in_ready   = (state == S_IDLE);
  assign busy_clear = (state == S_CLEAR);
  assign fifo_x     = addr_r[COORD_W-1:0];
  assign fifo_y     = addr_r[HM_AW-1:COORD_W];
  assign fifo_rst   = (state == S_UPD) && (d_new > threshold);
  assign fifo_push  = (state == S_UPD) && (d_new >= threshold);
  assign mean_start = (state == S_MEAN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_CLEAR;
      clr_addr  <= '0;
      addr_r    <= '0;
      last_r    <= 1'b0;
      threshold <= '0;
      n_new_max <= '0;
    end else begin
      case (state)
        S_CLEAR: begin
          clr_addr  <= clr_addr + 1'b1;
          threshold <= '0;
          if (clr_addr == '1) state <= S_IDLE;
        end
        S_IDLE: if (in_valid) begin
          addr_r <= in_addr;
          last_r <= in_last;
          if (in_hit)       state <= S_RD;
          else if (in_last) state <= S_MEAN;
        end
        S_RD: state <= S_UPD;
        S_UPD: begin
          if (d_new > threshold) begin
            threshold <= threshold + 1'b1;
            n_new_max <= n_new_max + 1;
          end
          state <= last_r ? S_MEAN : S_IDLE;
        end
        S_MEAN: state <= S_WAIT;
        S_WAIT: if (mean_done) state <= S_CLEAR;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
