// landmark_detector: decides whether an event's dictionary word is one of
// the object's landmarks.
//
// The landmarks (detector features, chosen offline for the target object)
// are held as a one-bit-per-word memory indexed by the k-d tree leaf index.
// Each event is looked up; it is passed on with `out_hit` set when its word
// is a landmark and with its pixel as the concatenated address {y, x}.
// Events that are not landmarks are passed on too, with out_hit = 0, so that
// the window-end flag still reaches the heat map.
//
// Interface: valid/ready in and out; the bit memory is written through
// lm_ld_* before use (all DICT_K bits must be written).  Timing: accept,
// one cycle memory read, then out_valid until out_ready (2 cycles minimum).
//
// The binary memory and the {y, x} address follow the design description;
// forwarding non-landmark events is this design's choice.
module landmark_detector
  import pcarect_pkg::*;
#(
  parameter int unsigned K = pcarect_pkg::DICT_K
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [IDX_W-1:0]   in_index,
  input  logic [COORD_W-1:0] in_x,
  input  logic [COORD_W-1:0] in_y,
  input  logic               in_last,
  output logic               out_valid,
  input  logic               out_ready,
  output logic               out_hit,
  output logic [HM_AW-1:0]   out_addr,
  output logic               out_last,
  input  logic               lm_ld_en,
  input  logic [IDX_W-1:0]   lm_ld_addr,
  input  logic               lm_ld_bit
);
  typedef enum logic [1:0] {S_IDLE, S_RD, S_OUT} state_t;
  state_t state;

  logic lm_mem [K];
  logic lm_q;

  assign in_ready = (state == S_IDLE);

  always_ff @(posedge clk) begin
    if (lm_ld_en && lm_ld_addr < IDX_W'(K)) lm_mem[lm_ld_addr] <= lm_ld_bit;
    lm_q <= (in_index < IDX_W'(K)) ? lm_mem[in_index] : 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      out_hit  <= 1'b0;
      out_addr <= '0;
      out_last <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          out_addr <= {in_y, in_x};
          out_last <= in_last;
          state    <= S_RD;
        end
        S_RD: begin
          out_hit <= lm_q;
          state   <= S_OUT;
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign out_valid = (state == S_OUT);
endmodule
