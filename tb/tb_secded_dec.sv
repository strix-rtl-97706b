// tb_secded_dec: self-checking test of the SEC-DED decoder.
//
// Code words are built by a reference encoder in the testbench. Each random word is
// presented clean, with one data bit flipped (must be corrected, syndrome = bit index),
// with only the global parity flipped (check-bit fault, data untouched), and with two
// data bits flipped (must be flagged uncorrectable, never "corrected").
module tb_secded_dec;
  localparam int unsigned A = 15, P = 4;
  int unsigned checks = 0, failures = 0;

  logic [A-1:0] d, dout;
  logic [P-1:0] par, syn;
  logic         g, cor, cf, unc;
  secded_dec #(.ALPHA(A), .P(P)) dut (.data(d), .partial(par), .global_p(g), .data_out(dout),
    .syndrome(syn), .corrected(cor), .check_fault(cf), .uncorrectable(unc));

  function automatic logic [P-1:0] ref_par(input logic [A-1:0] x);
    logic [P-1:0] r;
    r = '0;
    for (int unsigned b = 0; b < A; b++)
      if (x[b]) r = r ^ P'(b + 1);
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
    logic [A-1:0] w;
    int unsigned b1, b2;
    d = '0; par = '0; g = 1'b0;
    for (int t = 0; t < 400; t++) begin
      w = A'($urandom);
      // clean
      d = w; par = ref_par(w); g = ^w;
      #1;
      check(dout == w && !cor && !cf && !unc, "clean word passes");
      // single data bit
      b1 = $urandom_range(A - 1);
      d = w ^ (A'(1) << b1);
      #1;
      check(cor && !unc && dout == w && syn == P'(b1 + 1), $sformatf("single flip bit %0d corrected", b1));
      // global parity bit only
      d = w; g = ~(^w);
      #1;
      check(cf && !cor && !unc && dout == w, "global-bit fault flagged as check fault");
      // double data error
      g = ^w;
      b2 = (b1 + 1 + $urandom_range(A - 2)) % A;
      d = w ^ (A'(1) << b1) ^ (A'(1) << b2);
      #1;
      check(unc && !cor, $sformatf("double flip %0d,%0d detected", b1, b2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
