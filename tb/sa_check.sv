// sa_check: drives one systolic_array instance and checks it against a reference product.
//
// Used by tb_systolic_array at two shapes. For each trial a random B is preloaded (one row
// per cycle), then the N rows of a random A stream in back to back. Every output row must
// equal the matching row of A x B (signed INT8 products, 32-bit sums), rows must appear in
// order, the first must leave 2I-1 cycles after its input row entered, and the whole
// matrix must occupy L_SA = I*J + 2I - 1 cycles from first input to last output. A last
// trial holds a stuck-at-1 fault on one PE's partial-sum bit: the column of that PE must
// then carry the stuck bit, and no other column may change.
module sa_check #(
  parameter int unsigned I = 4,
  parameter int unsigned J = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        go,
  output logic        finished,
  output int unsigned checks,
  output int unsigned failures
);
  localparam int unsigned N = I * J;
  localparam int unsigned TRIALS = 6;

  logic pv = 1'b0, iv = 1'b0, ov, fi_en = 1'b0;
  logic [$clog2(N)-1:0] pidx = '0, fr = '0, fc = '0;
  logic [N-1:0][7:0] prow = '0, irow = '0;
  logic [N-1:0][31:0] orow;
  logic [4:0] fb = '0;

  systolic_array #(.I(I), .J(J)) dut (.clk, .rst_n, .preload_valid(pv), .preload_idx(pidx),
    .preload_row(prow), .in_valid(iv), .in_row(irow), .out_valid(ov), .out_row(orow),
    .fi_en, .fi_kind(2'd2), .fi_row(fr), .fi_col(fc), .fi_bit(fb));

  logic signed [7:0] a [N][N];
  logic signed [7:0] b [N][N];
  logic [31:0] c [N][N];
  int unsigned cyc = 0, t_in0 = 0, t_out0 = 0, t_outl = 0, n_out = 0;
  bit faulty = 0;
  int unsigned ffr = 0, ffc = 0;

  initial begin checks = 0; failures = 0; finished = 0; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (I=%0d J=%0d): %s", I, J, what); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (iv && pidx == 0 && n_out == 0 && t_in0 == 0) t_in0 <= cyc;
    if (ov && rst_n) begin  // outputs before reset are not meaningful
      if (n_out == 0) t_out0 <= cyc;
      t_outl <= cyc;
      for (int unsigned j = 0; j < N; j++) begin
        if (!faulty) check(orow[j] == c[n_out][j], $sformatf("C[%0d][%0d]", n_out, j));
        else if (j != ffc) check(orow[j] == c[n_out][j], $sformatf("fault-free column %0d", j));
      end
      if (faulty && n_out == N - 1)
        check(orow[ffc] == 32'h4000_0000, "stuck-at-1 bit 30 of the faulty PE reaches its column");
      n_out <= n_out + 1;
    end
  end

  initial begin
    wait (go);
    for (int t = 0; t <= TRIALS; t++) begin
      for (int r = 0; r < N; r++)
        for (int k = 0; k < N; k++) begin a[r][k] = 8'($urandom); b[r][k] = 8'($urandom); end
      if (t == 0) for (int r = 0; r < N; r++) for (int k = 0; k < N; k++) begin a[r][k] = -8'sd128; b[r][k] = -8'sd128; end
      for (int r = 0; r < N; r++)
        for (int j = 0; j < N; j++) begin
          c[r][j] = '0;
          for (int k = 0; k < N; k++) c[r][j] += 32'(signed'(a[r][k]) * signed'(b[k][j]));
        end
      faulty = (t == TRIALS);
      if (faulty) begin
        ffr = $urandom_range(N - 1); ffc = $urandom_range(N - 1);
        fr = ($clog2(N))'(ffr); fc = ($clog2(N))'(ffc); fb = 5'd30; fi_en = 1'b1;
        // a zero last row of A: its result column ffc must be exactly the stuck bit
        for (int k = 0; k < N; k++) a[N-1][k] = '0;
        for (int j = 0; j < N; j++) c[N-1][j] = '0;
      end
      for (int r = 0; r < N; r++) begin
        @(negedge clk); pv = 1'b1; pidx = ($clog2(N))'(r);
        for (int k = 0; k < N; k++) prow[k] = b[r][k];
      end
      @(negedge clk); pv = 1'b0;
      n_out = 0; t_in0 = 0;
      for (int r = 0; r < N; r++) begin
        @(negedge clk); iv = 1'b1; pidx = ($clog2(N))'(r);
        for (int k = 0; k < N; k++) irow[k] = a[r][k];
        if (r == 0) t_in0 = cyc;
      end
      @(negedge clk); iv = 1'b0;
      wait (n_out == N);
      @(negedge clk);
      if (!faulty) begin
        check(t_out0 - t_in0 == 2 * I - 1, $sformatf("latency %0d, expected 2I-1 = %0d", t_out0 - t_in0, 2 * I - 1));
        check(t_outl - t_in0 + 1 == strix_pkg::array_window(I, J),
              $sformatf("window %0d, expected L_SA = %0d", t_outl - t_in0 + 1, strix_pkg::array_window(I, J)));
      end
      fi_en = 1'b0;
      repeat (2 * I + 2) @(negedge clk);
    end
    finished = 1;
  end
endmodule
