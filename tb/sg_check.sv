// sg_check: drives one shield_group instance and checks it against reference checksums.
//
// Used by tb_shield_group at two shapes. For random A and B the predicted row checksums
// must equal the row sums of A x B and the predicted column checksums its column sums
// (32-bit, modulo 2^32), i.e. the result of the full ABFT product. `done` must come
// sigma + 1 cycles after `start`, with sigma = ceil(2N/K) + 1 + tree depth, and sigma must
// not exceed the array window L_SA = I*J + 2I - 1.
module sg_check #(
  parameter int unsigned I = 4,
  parameter int unsigned J = 2,
  parameter int unsigned K_EXP = 2,
  parameter int unsigned SIGMA_EXP = 11
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        go,
  output logic        finished,
  output int unsigned checks,
  output int unsigned failures
);
  localparam int unsigned N = I * J;

  logic start = 1'b0, busy, done;
  logic [N-1:0][N-1:0][7:0] am = '0, btm = '0;
  logic [N-1:0][31:0] rsb = '0, csa = '0, rcs, ccs;
  shield_group #(.I(I), .J(J)) dut (.clk, .rst_n, .start, .a_mat(am), .bt_mat(btm),
    .rs_b(rsb), .cs_a(csa), .row_cs(rcs), .col_cs(ccs), .busy, .done);

  initial begin checks = 0; finished = 0; failures = 0; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (I=%0d J=%0d): %s", I, J, what); end
  endtask

  initial begin
    logic signed [7:0] a [N][N];
    logic signed [7:0] b [N][N];
    logic [31:0] er [N];
    logic [31:0] ec [N];
    int unsigned lat;
    wait (go);
    check(strix_pkg::shield_count(I, J) == K_EXP, $sformatf("K = %0d", strix_pkg::shield_count(I, J)));
    check(SIGMA_EXP <= strix_pkg::array_window(I, J), "sigma fits the array window");
    for (int t = 0; t < 30; t++) begin
      for (int r = 0; r < N; r++)
        for (int k = 0; k < N; k++) begin
          a[r][k] = (t == 0) ? -8'sd128 : 8'($urandom);
          b[r][k] = (t == 0) ? -8'sd128 : 8'($urandom);
        end
      for (int i = 0; i < N; i++) begin er[i] = '0; ec[i] = '0; end
      for (int r = 0; r < N; r++)
        for (int j = 0; j < N; j++) begin
          logic [31:0] cij;
          cij = '0;
          for (int k = 0; k < N; k++) cij += 32'(signed'(a[r][k]) * signed'(b[k][j]));
          er[r] += cij; ec[j] += cij;
        end
      @(negedge clk);
      for (int r = 0; r < N; r++)
        for (int k = 0; k < N; k++) begin am[r][k] = a[r][k]; btm[k][r] = b[r][k]; end
      for (int k = 0; k < N; k++) begin
        rsb[k] = '0; csa[k] = '0;
        for (int j = 0; j < N; j++) begin rsb[k] += 32'(b[k][j]); csa[k] += 32'(a[j][k]); end
      end
      start = 1'b1;
      @(negedge clk); start = 1'b0;
      lat = 1;
      while (!done && lat < 500) begin @(negedge clk); lat++; end
      check(lat == SIGMA_EXP + 1, $sformatf("done %0d cycles after start, expected sigma + 1 = %0d", lat, SIGMA_EXP + 1));
      for (int i = 0; i < N; i++) begin
        check(rcs[i] == er[i], $sformatf("row checksum %0d", i));
        check(ccs[i] == ec[i], $sformatf("column checksum %0d", i));
      end
      @(negedge clk);
      check(!busy, "idle after done");
    end
    finished = 1;
  end
endmodule
