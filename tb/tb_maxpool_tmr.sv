// tb_maxpool_tmr: self-checking test of the triplicated max pooling unit.
//
// Windows of 4 signed 32-bit values, with ties and extreme values mixed in, must produce
// their signed maximum one cycle later. A fault in any one copy must be outvoted and
// raise `err`.
module tb_maxpool_tmr;
  localparam int unsigned P = 4, W = 32;
  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, iv = 1'b0, ov, err;
  logic [P-1:0][W-1:0] x = '0;
  logic [W-1:0] y, fm = '0;
  logic [1:0] fc = '0;
  maxpool_tmr #(.P(P), .W(W)) dut (.clk, .rst_n, .in_valid(iv), .x, .fi_copy(fc), .fi_mask(fm), .out_valid(ov), .y, .err);

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
    logic signed [W-1:0] e;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 1000; t++) begin
      for (int i = 0; i < P; i++) x[i] = (t % 5 == 0) ? 32'($urandom_range(3)) - 32'd2 : $urandom;
      if (t % 11 == 0) x[t % P] = 32'h8000_0000;
      e = x[0];
      for (int i = 1; i < P; i++) if ($signed(x[i]) > e) e = x[i];
      fc = 2'(t % 4); fm = $urandom | 32'h1;
      iv = 1'b1;
      @(negedge clk); iv = 1'b0;
      check(ov && y == e, $sformatf("max of window %0d", t));
      check(err == (fc != 0), "err flags an outvoted copy");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
