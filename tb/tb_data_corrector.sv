// tb_data_corrector: self-checking test of the data corrector.
//
// The corrector is fed a block and the mismatch flags and deltas that a verifier would
// report for it, computed here from the clean block and the corrupted one. Cases:
//   0: clean block                       -> OK, rows forwarded unchanged
//   1: one corrupted element             -> CORRECTED, clean block forwarded, location reported
//   2: two elements in distinct rows and columns with different deltas
//                                        -> CORRECTED by cross-localisation
//   3: a corrupted stored row checksum   -> CS_FAULT, data left alone
//   4: two errors in one row             -> UNCORR, data forwarded as read
// Masks are exercised: with mask F0 a flip in the low nibble is invisible and the corrector
// must repair only the selected bits. The decision must come one cycle after `check` and
// the N rows on the N following cycles.
module tb_data_corrector;
  import strix_pkg::*;
  localparam int unsigned N = 16, W = 8;
  int unsigned checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, in_valid = 1'b0, chk = 1'b0;
  logic [N-1:0][W-1:0] in_row = '0;
  logic [W-1:0] mask = '1;
  logic [N-1:0] rmm = '0, cmm = '0;
  logic [N-1:0][W-1:0] rdl = '0, cdl = '0;
  logic sv, ov;
  guard_status_e st;
  logic [3:0] er_r, er_c, oidx;
  logic [8:0] nfix;
  logic [N-1:0][W-1:0] orow;
  data_corrector #(.N(N), .W(W)) dut (.clk, .rst_n, .clear, .in_valid, .in_row, .mask,
    .check(chk), .row_mm(rmm), .col_mm(cmm), .row_delta(rdl), .col_delta(cdl),
    .status_valid(sv), .status(st), .err_row(er_r), .err_col(er_c), .n_fixed(nfix),
    .out_valid(ov), .out_idx(oidx), .out_row(orow));

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

  logic [N-1:0][N-1:0][W-1:0] blk, bad, expo;
  int unsigned seen[4];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      int unsigned kind, r0, c0, r1, c1;
      logic [N-1:0][W-1:0] er, ec, br, bc;
      guard_status_e exp_st;
      kind = t % 5;
      mask = (t % 7 == 6) ? 8'hF0 : 8'hFF;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) blk[r][c] = W'($urandom);
      bad = blk;
      r0 = $urandom_range(N-1); c0 = $urandom_range(N-1);
      r1 = (r0 + 1 + $urandom_range(N-2)) % N; c1 = (c0 + 1 + $urandom_range(N-2)) % N;
      case (kind)
        1: bad[r0][c0] ^= 8'h80;
        2: begin bad[r0][c0] ^= 8'h40; bad[r1][c1] ^= 8'h20; end
        4: begin bad[r0][c0] ^= 8'h40; bad[r0][c1] ^= 8'h80; end
        default: ;
      endcase
      er = '0; ec = '0; br = '0; bc = '0;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          er[r] += blk[r][c] & mask;  ec[c] += blk[r][c] & mask;
          br[r] += bad[r][c] & mask;  bc[c] += bad[r][c] & mask;
        end
      if (kind == 3) er[r0] = er[r0] ^ 8'h80;   // stored row checksum corrupted
      for (int i = 0; i < N; i++) begin
        rmm[i] = br[i] != er[i];  rdl[i] = br[i] - er[i];
        cmm[i] = bc[i] != ec[i];  cdl[i] = bc[i] - ec[i];
      end
      case (kind)
        0: begin exp_st = GS_OK;        expo = bad; end
        1, 2: begin exp_st = GS_CORRECTED; expo = blk; end
        3: begin exp_st = GS_CS_FAULT;  expo = bad; end
        default: begin exp_st = GS_UNCORR; expo = bad; end
      endcase
      for (int r = 0; r < N; r++) begin
        @(negedge clk); in_valid = 1'b1; clear = (r == 0); in_row = bad[r];
      end
      @(negedge clk); in_valid = 1'b0; clear = 1'b0; chk = 1'b1;
      @(negedge clk); chk = 1'b0;
      check(sv && st == exp_st, $sformatf("status %0d expected %0d (case %0d)", st, exp_st, kind));
      seen[st]++;
      if (kind == 1)
        check(er_r == 4'(r0) && er_c == 4'(c0) && nfix == 9'd1, "single error location reported");
      if (kind == 2) check(nfix == 9'd2, "two errors repaired");
      for (int r = 0; r < N; r++) begin
        @(negedge clk);
        check(ov && oidx == 4'(r) && orow == expo[r], $sformatf("row %0d forwarded, case %0d", r, kind));
      end
      @(negedge clk);
      check(!ov, "exactly N rows forwarded");
    end
    for (int s = 0; s < 4; s++) check(seen[s] > 0, $sformatf("status %0d seen", s));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
