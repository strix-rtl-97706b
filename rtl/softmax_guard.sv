// softmax_guard: property check on the output of a softmax unit.
//
// A softmax output row is a probability vector, so its elements must sum to one. The guard
// adds the N outputs (unsigned fixed point with FRAC fraction bits, 1.0 = 2^FRAC) and flags
// an error when the sum is more than TOL away from 2^FRAC. TOL absorbs the rounding of a
// fixed-point softmax (default: one LSB per element). One register stage: err is valid
// the cycle after in_valid. The invariant is the paper's; the number format and tolerance
// are this design's choices (the softmax unit itself is outside this design).
module softmax_guard #(
  parameter int unsigned N    = 16,
  parameter int unsigned W    = 16,
  parameter int unsigned FRAC = 15,
  parameter int unsigned TOL  = N
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [N-1:0][W-1:0]  p,
  output logic                 out_valid,
  output logic                 err,
  output logic [W+$clog2(N):0] sum
);
  localparam int unsigned SW = W + $clog2(N) + 1;
  logic [SW-1:0] s;

  always_comb begin
    s = '0;
    for (int unsigned i = 0; i < N; i++) s = s + SW'(p[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      err       <= 1'b0;
      sum       <= '0;
    end else begin
      out_valid <= in_valid;
      sum       <= s;
      err       <= in_valid &&
                   ((s > SW'((64'(1) << FRAC) + TOL)) || (s + SW'(TOL) < SW'(64'(1) << FRAC)));
    end
  end
endmodule
