// layernorm_guard: property check on the output of a LayerNorm unit.
//
// Before the affine scale and shift, normalised activations x_i = (v_i - mean)/std have
// zero sum. The guard adds the N signed normalised values and flags an error when the
// magnitude of the sum exceeds TOL (rounding allowance of the fixed-point unit, default one
// LSB per element). One register stage: err is valid the cycle after in_valid. The
// invariant is the paper's; number format and tolerance are this design's choices (the
// LayerNorm unit itself is outside this design).
module layernorm_guard #(
  parameter int unsigned N   = 16,
  parameter int unsigned W   = 16,
  parameter int unsigned TOL = N
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [N-1:0][W-1:0]         xn,
  output logic                        out_valid,
  output logic                        err,
  output logic signed [W+$clog2(N):0] sum
);
  localparam int unsigned SW = W + $clog2(N) + 1;
  logic signed [SW-1:0] s;

  always_comb begin
    s = '0;
    for (int unsigned i = 0; i < N; i++) s = s + SW'($signed(xn[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      err       <= 1'b0;
      sum       <= '0;
    end else begin
      out_valid <= in_valid;
      sum       <= s;
      err       <= in_valid && ((s > $signed(SW'(TOL))) || (s < -$signed(SW'(TOL))));
    end
  end
endmodule
