// tb_secded_enc: self-checking test of the SEC-DED encoder.
//
// For random 15-bit words (and the 32-bit width used for configuration registers) the
// partial parities are compared with a reference that builds, for each parity bit, the
// mask of data positions whose 1-based index has that bit set, and the global bit with
// the XOR of the data. A property check follows: flipping data bit p (index p+1) must
// change exactly the partial parities of the binary digits of p+1, which is what lets the
// decoder point at the bit.
module tb_secded_enc;
  localparam int unsigned A1 = 15, P1 = 4;
  localparam int unsigned A2 = 32, P2 = 6;
  int unsigned checks = 0, failures = 0;

  logic [A1-1:0] d1;  logic [P1-1:0] p1;  logic g1;
  logic [A2-1:0] d2;  logic [P2-1:0] p2;  logic g2;
  secded_enc #(.ALPHA(A1), .P(P1)) dut1 (.data(d1), .partial(p1), .global_p(g1));
  secded_enc #(.ALPHA(A2), .P(P2)) dut2 (.data(d2), .partial(p2), .global_p(g2));

  function automatic logic [P2-1:0] ref_par(input logic [A2-1:0] d, input int unsigned a, input int unsigned np);
    logic [P2-1:0] r;
    r = '0;
    for (int unsigned i = 0; i < np; i++) begin
      logic [A2-1:0] m;
      m = '0;
      for (int unsigned b = 0; b < a; b++) m[b] = ((b + 1) & (1 << i)) != 0;
      r[i] = ^(d & m);
    end
    return r;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [P1-1:0] base;
    d1 = '0; d2 = '0;
    #1;
    check(p1 == '0 && g1 == 1'b0, "zero word encodes to zero");
    // Fig. 8 example: only data bit index 0011 set -> partial parities 001 and 010 set
    d1 = 15'b000_0000_0000_0100;
    #1;
    check(p1 == 4'b0011 && g1 == 1'b1, "bit index 3 sets partial parities 0 and 1");
    for (int t = 0; t < 300; t++) begin
      d1 = A1'($urandom);
      d2 = $urandom;
      #1;
      check(p1 == P1'(ref_par(A2'(d1), A1, P1)) && g1 == ^d1, $sformatf("enc15 %h", d1));
      check(p2 == ref_par(d2, A2, P2) && g2 == ^d2, $sformatf("enc32 %h", d2));
      base = p1;
      for (int unsigned b = 0; b < A1; b += 4) begin
        d1[b] = ~d1[b];
        #1;
        check((p1 ^ base) == P1'(b + 1), $sformatf("flip of bit %0d gives syndrome %0d", b, b + 1));
        d1[b] = ~d1[b];
        #1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
