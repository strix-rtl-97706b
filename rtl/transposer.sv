// transposer: captures the weight block B while it is preloaded and presents B^T.
//
// During preload the rows of B pass the transposer on their way to the array (write port:
// row index and row data, one row per cycle). The stored N x N block is offered as B^T,
// row j of B^T being column j of B, which the shield group needs to predict the column
// checksums of the product. Write takes effect at the clock edge; the output is the
// registered block (no read latency beyond that). The paper names the transposer in the
// preload stage; a register block that is written by rows and read by columns is the
// simplest form of it.
module transposer #(
  parameter int unsigned N  = 16,
  parameter int unsigned WI = 8
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [$clog2(N)-1:0]         widx,
  input  logic [N-1:0][WI-1:0]         wrow,
  output logic [N-1:0][N-1:0][WI-1:0]  bt
);
  logic [N-1:0][N-1:0][WI-1:0] b;

  always_ff @(posedge clk) begin
    if (we) b[widx] <= wrow;
  end

  always_comb begin
    for (int unsigned j = 0; j < N; j++)
      for (int unsigned k = 0; k < N; k++) bt[j][k] = b[k][j];
  end
endmodule
