// tb_data_verifier: self-checking test of the data verifier.
//
// Each random 16 x 16 block gets reference checksums computed by the testbench. The block
// is then streamed back with 0, 1 or 2 corrupted elements (or with a corrupted stored
// checksum). The verifier must flag exactly the rows and columns whose masked sums
// changed, report delta = recomputed - stored (mod 256), and raise `done` two cycles after
// the last row.
module tb_data_verifier;
  localparam int unsigned N = 16, W = 8;
  int unsigned checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, in_valid = 1'b0;
  logic [N-1:0][W-1:0] in_row = '0, srs = '0, scs = '0;
  logic [W-1:0] mask = '1;
  logic done;
  logic [N-1:0] rmm, cmm;
  logic [N-1:0][W-1:0] rd, cd, crs, ccs;
  data_verifier #(.N(N), .W(W)) dut (.clk, .rst_n, .clear, .in_valid, .in_row, .mask,
    .stored_row_cs(srs), .stored_col_cs(scs), .done, .row_mm(rmm), .col_mm(cmm),
    .row_delta(rd), .col_delta(cd), .calc_row_cs(crs), .calc_col_cs(ccs));

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

  logic [N-1:0][N-1:0][W-1:0] blk, bad;
  logic [N-1:0][W-1:0] er, ec, br, bc;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 150; t++) begin
      int unsigned nerr;
      mask = (t % 4 == 3) ? 8'hF0 : 8'hFF;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) blk[r][c] = W'($urandom);
      bad = blk;
      nerr = t % 3;
      for (int e = 0; e < nerr; e++)
        bad[$urandom_range(N-1)][$urandom_range(N-1)] ^= W'(1 << $urandom_range(W-1));
      er = '0; ec = '0; br = '0; bc = '0;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          er[r] += blk[r][c] & mask;  ec[c] += blk[r][c] & mask;
          br[r] += bad[r][c] & mask;  bc[c] += bad[r][c] & mask;
        end
      srs = er; scs = ec;
      if (t % 10 == 9) scs[3] = scs[3] + 8'h10;   // a faulty stored checksum
      for (int r = 0; r < N; r++) begin
        @(negedge clk); in_valid = 1'b1; clear = (r == 0); in_row = bad[r];
      end
      @(negedge clk); in_valid = 1'b0; clear = 1'b0;
      check(!done, "done not yet one cycle after the last row");
      @(negedge clk);
      check(done, "done two cycles after the last row");
      for (int i = 0; i < N; i++) begin
        check(rmm[i] == (br[i] != srs[i]) && rd[i] == W'(br[i] - srs[i]),
              $sformatf("row %0d flag/delta, block %0d", i, t));
        check(cmm[i] == (bc[i] != scs[i]) && cd[i] == W'(bc[i] - scs[i]),
              $sformatf("col %0d flag/delta, block %0d", i, t));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
