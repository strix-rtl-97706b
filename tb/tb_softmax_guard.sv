// tb_softmax_guard: self-checking test of the softmax sum check.
//
// Rows of 16 probabilities in Q1.15 are built so that they sum to exactly 1.0 (32768),
// then perturbed by a random rounding error within the tolerance (must pass) or by an
// error beyond it, such as a flipped high bit (must be flagged). The reported sum must
// equal the sum computed here.
module tb_softmax_guard;
  localparam int unsigned N = 16, W = 16;
  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, iv = 1'b0, ov, err;
  logic [N-1:0][W-1:0] p = '0;
  logic [W+4:0] sum;
  softmax_guard #(.N(N), .W(W), .FRAC(15), .TOL(16)) dut (.clk, .rst_n, .in_valid(iv), .p, .out_valid(ov), .err, .sum);

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
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 600; t++) begin
      int unsigned left, s;
      int d;
      bit bad;
      left = 32768;
      for (int i = 0; i < N - 1; i++) begin
        p[i] = 16'($urandom_range(left / 2));
        left -= p[i];
      end
      p[N-1] = 16'(left);
      bad = (t % 3 == 2);
      d = bad ? ((t % 2) ? 17 + $urandom_range(500) : -17 - $urandom_range(500)) : $urandom_range(32) - 16;
      if (bad && t % 9 == 2) begin
        for (int i = 0; i < N; i++) if (p[i] < 16'h4000) begin p[i] = p[i] | 16'h4000; break; end
      end else begin
        // spread the perturbation over an element that can take it
        for (int i = 0; i < N; i++) if (int'(p[i]) + d >= 0 && int'(p[i]) + d < 65536) begin p[i] = 16'(int'(p[i]) + d); break; end
      end
      s = 0;
      for (int i = 0; i < N; i++) s += p[i];
      iv = 1'b1;
      @(negedge clk); iv = 1'b0;
      check(ov && sum == 21'(s), "reported sum");
      check(err == ((s > 32768 + 16) || (s + 16 < 32768)), $sformatf("verdict for sum %0d", s));
      check(err == bad, "a perturbation beyond the tolerance is detected, rounding is not");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
