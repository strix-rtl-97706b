// tb_layernorm_guard: self-checking test of the LayerNorm sum check.
//
// Rows of 16 signed normalised activations are built to sum to zero, then perturbed by a
// small rounding error within the tolerance (must pass) or by a corrupted element (must be
// flagged). The reported signed sum must equal the one computed here.
module tb_layernorm_guard;
  localparam int unsigned N = 16, W = 16;
  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, iv = 1'b0, ov, err;
  logic [N-1:0][W-1:0] xn = '0;
  logic signed [W+4:0] sum;
  layernorm_guard #(.N(N), .W(W), .TOL(16)) dut (.clk, .rst_n, .in_valid(iv), .xn, .out_valid(ov), .err, .sum);

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
      int s;
      bit bad;
      for (int i = 0; i < N; i += 2) begin
        int v;
        v = $urandom_range(16000);
        xn[i] = 16'(v); xn[i+1] = 16'(-v);
      end
      bad = (t % 3 == 1);
      if (bad) xn[t % N] = xn[t % N] ^ 16'h2000;
      else xn[t % N] = 16'(int'($signed(xn[t % N])) + int'($urandom_range(32)) - 16);
      s = 0;
      for (int i = 0; i < N; i++) s += int'($signed(xn[i]));
      iv = 1'b1;
      @(negedge clk); iv = 1'b0;
      check(ov && int'(sum) == s, "reported sum");
      check(err == (s > 16 || s < -16), $sformatf("verdict for sum %0d", s));
      check(err == bad, "corrupted element detected, rounding tolerated");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
