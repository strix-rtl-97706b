// tb_checksum_adder: self-checking test of the checksum adder.
//
// Random 16 x 16 INT8 blocks are streamed one row per cycle, with and without gaps
// between rows and with random bit-selection masks. After the 16th row the row sums
// (adder trees) and column sums (adder-register units) must equal the masked modulo-256
// sums computed by the testbench, and `done` must pulse exactly one cycle after the last
// row (a throughput of one row per cycle with one cycle of latency).
module tb_checksum_adder;
  localparam int unsigned N = 16, W = 8;
  int unsigned checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, in_valid = 1'b0;
  logic [N-1:0][W-1:0] in_row = '0, rs, cs;
  logic [W-1:0] mask = '1;
  logic done;
  checksum_adder #(.N(N), .W(W)) dut (.clk, .rst_n, .clear, .in_valid, .in_row, .mask,
    .row_sums(rs), .col_sums(cs), .done);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0][N-1:0][W-1:0] blk;
  logic [N-1:0][W-1:0] er, ec;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 100; t++) begin
      mask = (t % 3 == 0) ? 8'hFF : W'($urandom);
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) blk[r][c] = W'($urandom);
      er = '0; ec = '0;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          er[r] = er[r] + (blk[r][c] & mask);
          ec[c] = ec[c] + (blk[r][c] & mask);
        end
      for (int r = 0; r < N; r++) begin
        @(negedge clk);
        check(!done, "no done before the last row");
        in_valid = 1'b1; clear = (r == 0); in_row = blk[r];
        if (t % 2 == 1 && r == 7) begin
          @(negedge clk); in_valid = 1'b0; clear = 1'b0;   // a gap in the stream
          check(!done, "no done during a gap");
        end
      end
      @(negedge clk); in_valid = 1'b0; clear = 1'b0;
      check(done, "done one cycle after the last row");
      check(rs == er, $sformatf("row checksums, block %0d", t));
      check(cs == ec, $sformatf("column checksums, block %0d", t));
      @(negedge clk);
      check(!done, "done is a single pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
