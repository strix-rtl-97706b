// relu_tmr: ReLU over a row of N signed values, protected by triple modular redundancy.
//
// ReLU has no cheap algebraic invariant to check, so the paper protects it with redundant
// copies: three independent ReLU lanes compute the row and a bitwise majority voter
// (tmr_vote) forms the output, masking a fault in any one copy and flagging it.
// fi_copy/fi_mask inject a fault into one copy's result (fi_copy 1..3; 0 = none).
// One register stage: y/err are valid the cycle after in_valid.
module relu_tmr #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [N-1:0][W-1:0]  x,
  input  logic [1:0]           fi_copy,
  input  logic [W-1:0]         fi_mask,
  output logic                 out_valid,
  output logic [N-1:0][W-1:0]  y,
  output logic                 err
);
  logic [N-1:0][W-1:0] r0, r1, r2, v;
  logic [N-1:0]        mm;

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      r0[i] = x[i][W-1] ? '0 : x[i];
      r1[i] = ($signed(x[i]) > 0) ? x[i] : '0;
      r2[i] = x[i] & {W{~x[i][W-1]}};
      if (fi_copy == 2'd1) r0[i] = r0[i] ^ fi_mask;
      if (fi_copy == 2'd2) r1[i] = r1[i] ^ fi_mask;
      if (fi_copy == 2'd3) r2[i] = r2[i] ^ fi_mask;
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_vote
    tmr_vote #(.W(W)) u_vote (.a(r0[i]), .b(r1[i]), .c(r2[i]), .y(v[i]), .mismatch(mm[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
      err       <= 1'b0;
    end else begin
      out_valid <= in_valid;
      y         <= v;
      err       <= in_valid && (|mm);
    end
  end
endmodule
