// maxpool_tmr: max pooling over a window of P signed values, protected by TMR.
//
// Pooling, like ReLU, is guarded by redundancy in the paper. Three copies reduce the
// window to its maximum (one scanning upwards, one downwards, one as a pairwise tree, so
// the copies are written differently) and a bitwise majority voter picks the result.
// fi_copy/fi_mask corrupt one copy (1..3; 0 = none). One register stage.
module maxpool_tmr #(
  parameter int unsigned P = 4,
  parameter int unsigned W = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [P-1:0][W-1:0]  x,
  input  logic [1:0]           fi_copy,
  input  logic [W-1:0]         fi_mask,
  output logic                 out_valid,
  output logic [W-1:0]         y,
  output logic                 err
);
  logic [W-1:0] m0, m1, m2, v;
  logic         mm;

  always_comb begin
    logic [P-1:0][W-1:0] t;
    m0 = x[0];
    for (int unsigned i = 1; i < P; i++) if ($signed(x[i]) > $signed(m0)) m0 = x[i];
    m1 = x[P-1];
    for (int i = P - 2; i >= 0; i--) if ($signed(x[i]) >= $signed(m1)) m1 = x[i];
    t = x;
    for (int unsigned span = 1; span < P; span = span * 2)
      for (int unsigned i = 0; i + span < P; i += 2 * span)
        if ($signed(t[i + span]) > $signed(t[i])) t[i] = t[i + span];
    m2 = t[0];
    if (fi_copy == 2'd1) m0 = m0 ^ fi_mask;
    if (fi_copy == 2'd2) m1 = m1 ^ fi_mask;
    if (fi_copy == 2'd3) m2 = m2 ^ fi_mask;
  end

  tmr_vote #(.W(W)) u_vote (.a(m0), .b(m1), .c(m2), .y(v), .mismatch(mm));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
      err       <= 1'b0;
    end else begin
      out_valid <= in_valid;
      y         <= v;
      err       <= in_valid && mm;
    end
  end
endmodule
