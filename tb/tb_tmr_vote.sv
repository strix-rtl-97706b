// tb_tmr_vote: self-checking test of the 2-of-3 voter.
//
// For random words: three equal copies pass with no mismatch; any single corrupted copy
// is outvoted (output equals the good value) and flagged; and for arbitrary copies every
// output bit must be the majority of the three input bits.
module tb_tmr_vote;
  localparam int unsigned W = 32;
  int unsigned checks = 0, failures = 0;
  logic [W-1:0] a = '0, b = '0, c = '0, y;
  logic mm;
  tmr_vote #(.W(W)) dut (.a, .b, .c, .y, .mismatch(mm));

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
    for (int t = 0; t < 500; t++) begin
      logic [W-1:0] v, e;
      v = $urandom; e = $urandom | 32'h1;
      a = v; b = v; c = v; #1;
      check(y == v && !mm, "agreeing copies");
      case (t % 3)
        0: a = v ^ e;
        1: b = v ^ e;
        default: c = v ^ e;
      endcase
      #1;
      check(y == v && mm, $sformatf("single bad copy %0d outvoted", t % 3));
      a = $urandom; b = $urandom; c = $urandom; #1;
      for (int i = 0; i < W; i++)
        check(y[i] == ((32'(a[i]) + 32'(b[i]) + 32'(c[i])) >= 2), "bitwise majority");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
