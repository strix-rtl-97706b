// tb_guardpad: self-checking test of the guardpad (checksum memory).
//
// Both sides are exercised at once: the 8-bit side that holds scratchpad checksums
// (2048 rows) and the 32-bit side that holds accumulator checksums (128 rows). Random
// checksum vectors are written and read back one cycle after the request, with
// independent traffic on the two sides, and the fault-injection masks must flip the
// addressed row on the addressed side only.
module tb_guardpad;
  localparam int unsigned N = 16, WE = 8, WA = 32, ER = 2048, AR = 128;
  int unsigned checks = 0, failures = 0;

  logic clk = 1'b0;
  logic e_we = 1'b0, e_re = 1'b0, e_fi = 1'b0, a_we = 1'b0, a_re = 1'b0, a_fi = 1'b0;
  logic [10:0] e_wa = '0, e_ra = '0, e_fa = '0;
  logic [6:0]  a_wa = '0, a_ra = '0, a_fa = '0;
  logic [N-1:0][WE-1:0] e_wd = '0, e_rd, e_fm = '0;
  logic [N-1:0][WA-1:0] a_wd = '0, a_rd, a_fm = '0;
  guardpad dut (.clk,
    .e_we, .e_waddr(e_wa), .e_wdata(e_wd), .e_re, .e_raddr(e_ra), .e_rdata(e_rd),
    .e_fi_en(e_fi), .e_fi_addr(e_fa), .e_fi_mask(e_fm),
    .a_we, .a_waddr(a_wa), .a_wdata(a_wd), .a_re, .a_raddr(a_ra), .a_rdata(a_rd),
    .a_fi_en(a_fi), .a_fi_addr(a_fa), .a_fi_mask(a_fm));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0][WE-1:0] es [ER];
  logic [N-1:0][WA-1:0] as [AR];

  initial begin
    for (int i = 0; i < AR; i++) begin
      @(negedge clk);
      e_we = 1'b1; e_wa = 11'(i * 16 + 1); for (int j = 0; j < N; j++) e_wd[j] = WE'($urandom); es[i * 16 + 1] = e_wd;
      a_we = 1'b1; a_wa = 7'(i);           for (int j = 0; j < N; j++) a_wd[j] = $urandom;      as[i] = a_wd;
    end
    @(negedge clk); e_we = 1'b0; a_we = 1'b0;
    for (int k = 0; k < 300; k++) begin
      int unsigned i, ia;
      i = $urandom_range(AR - 1); ia = $urandom_range(AR - 1);
      e_fi = (k % 4 == 1) || (k % 4 == 0); e_fa = (k % 4 == 0) ? 11'(i * 16 + 17) : 11'(i * 16 + 1); for (int j = 0; j < N; j++) e_fm[j] = WE'($urandom);
      a_fi = (k % 4 == 2) || (k % 4 == 3); a_fa = (k % 4 == 3) ? 7'(ia + 1) : 7'(ia);          for (int j = 0; j < N; j++) a_fm[j] = $urandom;
      @(negedge clk);
      e_re = 1'b1; e_ra = 11'(i * 16 + 1);
      a_re = 1'b1; a_ra = 7'(ia);
      @(negedge clk); e_re = 1'b0; a_re = 1'b0;
      check(e_rd == (es[i * 16 + 1] ^ ((e_fi && e_fa == e_ra) ? e_fm : '0)), $sformatf("elem-side row %0d", i * 16 + 1));
      check(a_rd == (as[ia] ^ ((a_fi && a_fa == a_ra) ? a_fm : '0)), $sformatf("acc-side row %0d", ia));
      e_fi = 1'b0; a_fi = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
