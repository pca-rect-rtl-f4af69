// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// Used twice by the mean calculation (sum of x / count, sum of y / count).
// On `start` the operands are latched; W + 1 cycles later `done` pulses for one
// cycle with quotient and remainder valid (they stay until the next start).
// A zero divisor gives an all-ones quotient.  The design description only
// asks for "hardware dividers"; the restoring algorithm is this design's
// choice (no multipliers, W + 1 cycles of latency).
module seq_divider #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient,
  output logic [W-1:0] remainder
);
  logic [W-1:0]         dvs;
  logic [W:0]           rem;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]           trial;

  assign remainder = rem[W-1:0];

  always_comb trial = {rem[W-1:0], quotient[W-1]} - {1'b0, dvs};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      dvs       <= '0;
      rem       <= '0;
      cnt       <= '0;
      quotient  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        dvs      <= divisor;
        rem      <= '0;
        quotient <= dividend;   // shifted out MSB first, quotient bits shifted in
        cnt      <= ($clog2(W+1))'(W);
      end else if (busy) begin
        if (!trial[W]) begin
          rem      <= trial;
          quotient <= {quotient[W-2:0], 1'b1};
        end else begin
          rem      <= {rem[W-1:0], quotient[W-1]};
          quotient <= {quotient[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
