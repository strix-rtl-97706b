// shield: one checksum engine of the shield group.
//
// Each cycle the shield takes one vector x of N INT8 elements and multiplies it lane by lane
// with a fixed checksum vector v (N multipliers, one per PE of an array row), then reduces
// the N products to one 32-bit sum in a pipelined adder tree. With x a row of A and v the
// row checksums of B, the sum is one row checksum of A x B; with x a row of B^T and v the
// column checksums of A, it is one column checksum of A x B.
//
// The tree adds 2^J values per registered stage, so each stage is as deep as the J PEs of a
// tile and never lengthens the array's critical path (the paper caps the tree depth at the
// PEs per tile row). Latency: 1 (multiplier register) + tree_stages(N, J) cycles; one vector
// per cycle throughput. Products and sums wrap modulo 2^32, the width of the array's outputs.
module shield #(
  parameter int unsigned N  = 16,
  parameter int unsigned J  = 1,
  parameter int unsigned WI = 8,
  parameter int unsigned WA = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [N-1:0][WI-1:0] x,
  input  logic [N-1:0][WA-1:0] v,
  output logic                 out_valid,
  output logic [WA-1:0]        sum
);
  localparam int unsigned S   = strix_pkg::tree_stages(N, J);
  localparam int unsigned FAN = 1 << J;

  logic [N-1:0][WA-1:0] prod;
  logic                 prod_v;
  logic [N-1:0][WA-1:0] lvl [S];
  logic [S-1:0]         lvl_v;
  logic [N-1:0][WA-1:0] lvl_n [S];   // next value of each tree stage

  // each stage adds groups of FAN = 2^J neighbours of the previous stage
  always_comb begin
    for (int unsigned s = 0; s < S; s++) begin
      lvl_n[s] = '0;
      for (int unsigned g = 0; g < N; g++)
        lvl_n[s][g / FAN] = lvl_n[s][g / FAN] + ((s == 0) ? prod[g] : lvl[s-1][g]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod   <= '0;
      prod_v <= 1'b0;
      lvl_v  <= '0;
      for (int unsigned s = 0; s < S; s++) lvl[s] <= '0;
    end else begin
      prod_v <= in_valid;
      for (int unsigned k = 0; k < N; k++)
        prod[k] <= WA'($signed(x[k]) * $signed(v[k]));
      for (int unsigned s = 0; s < S; s++) begin
        lvl[s]   <= lvl_n[s];
        lvl_v[s] <= (s == 0) ? prod_v : lvl_v[s-1];
      end
    end
  end

  assign out_valid = lvl_v[S-1];
  assign sum       = lvl[S-1][0];
endmodule
