// shield_group: K shields that predict the row and column checksums of C = A x B in
// parallel with the systolic array (the ABFT-style check of the matrix engine).
//
// Principle: with rsB[k] = sum_j B[k][j] (row checksums of B) and csA[k] = sum_i A[i][k]
// (column checksums of A),
//   row checksum i of C = A[i,:] . rsB      (one vector per row of A)
//   col checksum j of C = B^T[j,:] . csA    (one vector per row of B^T)
// so 2N vectors are pushed through the shields, K per cycle: vector t goes to shield t mod K
// in cycle t div K. The results are the same checksums a full ABFT product of the
// checksum-extended matrices would give, but the array itself is never touched.
// K defaults to the paper's minimum shield parallelism, strix_pkg::shield_count(I, J), the
// smallest K whose latency sigma = 2IJ/K + 1 + tree depth fits inside the array window
// L_SA = IJ + 2I - 1 (K = 1 for the 16 x 16 default).
//
// Interface: pulse `start` with the four operands stable until `done`. The first vectors
// enter the shields the cycle after start; the last checksum is written sigma cycles after
// that, sigma = ceil(2N/K) + 1 + tree_stages(N,J), the paper's latency equation, and `done`
// pulses with it, i.e. sigma + 1 cycles after start. For the 16 x 16 default sigma = 37
// against L_SA = 47.
module shield_group #(
  parameter int unsigned I  = 16,
  parameter int unsigned J  = 1,
  parameter int unsigned K  = strix_pkg::shield_count(I, J),
  parameter int unsigned WI = 8,
  parameter int unsigned WA = 32,
  parameter int unsigned N  = I * J
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [N-1:0][N-1:0][WI-1:0]  a_mat,    // A, row-major
  input  logic [N-1:0][N-1:0][WI-1:0]  bt_mat,   // B^T, row-major (row j = column j of B)
  input  logic [N-1:0][WA-1:0]         rs_b,     // row checksums of B
  input  logic [N-1:0][WA-1:0]         cs_a,     // column checksums of A
  output logic [N-1:0][WA-1:0]         row_cs,   // predicted row checksums of A x B
  output logic [N-1:0][WA-1:0]         col_cs,   // predicted column checksums of A x B
  output logic                         busy,
  output logic                         done
);
  localparam int unsigned NV    = 2 * N;
  localparam int unsigned STEPS = (NV + K - 1) / K;
  localparam int unsigned LAT   = 1 + strix_pkg::tree_stages(N, J);
  localparam int unsigned VW    = $clog2(NV + K + 1);

  logic [VW-1:0]  step;
  logic           feeding;
  logic [K-1:0]   sh_in_v, sh_out_v;
  logic [N-1:0][WI-1:0] sh_x [K];
  logic [N-1:0][WA-1:0] sh_v [K];
  logic [WA-1:0]  sh_sum [K];
  logic [VW-1:0]  idx_pipe [LAT];  // vector index of shield 0 travelling with the data
  logic [LAT-1:0] last_pipe;

  always_comb begin
    for (int unsigned k = 0; k < K; k++) begin
      int unsigned t;
      t = 32'(step) * K + k;
      sh_in_v[k] = feeding && (t < NV);
      if (t < N) begin
        sh_x[k] = a_mat[t % N];
        sh_v[k] = rs_b;
      end else begin
        sh_x[k] = bt_mat[t % N];
        sh_v[k] = cs_a;
      end
    end
  end

  for (genvar k = 0; k < K; k++) begin : g_sh
    shield #(.N(N), .J(J), .WI(WI), .WA(WA)) u_shield (
      .clk, .rst_n, .in_valid(sh_in_v[k]), .x(sh_x[k]), .v(sh_v[k]),
      .out_valid(sh_out_v[k]), .sum(sh_sum[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step      <= '0;
      feeding   <= 1'b0;
      busy      <= 1'b0;
      done      <= 1'b0;
      row_cs    <= '0;
      col_cs    <= '0;
      last_pipe <= '0;
      for (int unsigned l = 0; l < LAT; l++) idx_pipe[l] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        step    <= '0;
        feeding <= 1'b1;
        busy    <= 1'b1;
      end else if (feeding) begin
        if (32'(step) == STEPS - 1) feeding <= 1'b0;
        step <= step + 1'b1;
      end
      idx_pipe[0]  <= VW'(32'(step) * K);
      last_pipe[0] <= feeding && (32'(step) == STEPS - 1);
      for (int unsigned l = 1; l < LAT; l++) begin
        idx_pipe[l]  <= idx_pipe[l-1];
        last_pipe[l] <= last_pipe[l-1];
      end
      for (int unsigned k = 0; k < K; k++) begin
        if (sh_out_v[k]) begin
          if (32'(idx_pipe[LAT-1]) + k < N) row_cs[(32'(idx_pipe[LAT-1]) + k) % N] <= sh_sum[k];
          else                              col_cs[(32'(idx_pipe[LAT-1]) + k) % N] <= sh_sum[k];
        end
      end
      if (last_pipe[LAT-1]) begin
        done <= 1'b1;
        busy <= 1'b0;
      end
    end
  end
endmodule
