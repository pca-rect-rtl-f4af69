// subsample: maps a pixel to its cell in the zero-padded cell-count matrix.
//
// Each 8-bit coordinate is halved by a one-bit right shift (the 2 x 2 pooling
// window), then offset by the pad (p = q = 2) so that the descriptor window
// around a border cell stays inside the 7-bit range.  The two 7-bit results
// are concatenated into one 14-bit address {y_sub, x_sub}.  Purely
// combinational, zero latency.
//
// From the design description: the 8-bit inputs, the shift, the addition of
// p and q, the two 7-bit halves and the 14-bit concatenation.  Placing Y in
// the upper half follows the drawing order; the 7-bit sums wrap modulo 128,
// which makes never-written cells 126-127 act as the zero pad above and left
// of the sensor.
module subsample
  import pcarect_pkg::*;
#(
  parameter int unsigned OFF_X = 2,
  parameter int unsigned OFF_Y = 2
) (
  input  logic [COORD_W-1:0] x,
  input  logic [COORD_W-1:0] y,
  output logic [CELL_AW-1:0] addr
);
  logic [SUB_W-1:0] xs, ys;

  always_comb begin
    xs   = SUB_W'(x >> 1) + SUB_W'(OFF_X);
    ys   = SUB_W'(y >> 1) + SUB_W'(OFF_Y);
    addr = {ys, xs};
  end
endmodule
