// tb_transposer: self-checking test of the transposer.
//
// Random 16 x 16 INT8 blocks are written row by row, as during a preload, in random row
// order; after the last row, output row j must equal column j of the block. A partial
// rewrite of one row must change exactly one column of the transposed output.
module tb_transposer;
  localparam int unsigned N = 16;
  int unsigned checks = 0, failures = 0;

  logic clk = 1'b0, we = 1'b0;
  logic [3:0] widx = '0;
  logic [N-1:0][7:0] wrow = '0;
  logic [N-1:0][N-1:0][7:0] bt;
  transposer dut (.clk, .we, .widx, .wrow, .bt);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] b [N][N];
  int unsigned order [N];

  initial begin
    for (int t = 0; t < 50; t++) begin
      for (int r = 0; r < N; r++) order[r] = r;
      order.shuffle();
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) b[r][c] = 8'($urandom);
      for (int i = 0; i < N; i++) begin
        @(negedge clk); we = 1'b1; widx = 4'(order[i]);
        for (int c = 0; c < N; c++) wrow[c] = b[order[i]][c];
      end
      @(negedge clk); we = 1'b0;
      for (int j = 0; j < N; j++)
        for (int k = 0; k < N; k++) check(bt[j][k] == b[k][j], $sformatf("B^T[%0d][%0d]", j, k));
      // rewrite one row
      @(negedge clk); we = 1'b1; widx = 4'(t % N);
      for (int c = 0; c < N; c++) begin b[t % N][c] = 8'($urandom); wrow[c] = b[t % N][c]; end
      @(negedge clk); we = 1'b0;
      for (int j = 0; j < N; j++) check(bt[j][t % N] == b[t % N][j], "rewritten row appears as a column");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
