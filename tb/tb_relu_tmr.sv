// tb_relu_tmr: self-checking test of the triplicated ReLU.
//
// Rows of 16 signed 32-bit values (including 0, the most negative and most positive) go
// through the unit; one cycle later each output must be max(x, 0). Faults injected into any
// one of the three copies must be outvoted (same output) and raise `err`.
module tb_relu_tmr;
  localparam int unsigned N = 16, W = 32;
  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, iv = 1'b0, ov, err;
  logic [N-1:0][W-1:0] x = '0, y;
  logic [1:0] fc = '0;
  logic [W-1:0] fm = '0;
  relu_tmr #(.N(N), .W(W)) dut (.clk, .rst_n, .in_valid(iv), .x, .fi_copy(fc), .fi_mask(fm), .out_valid(ov), .y, .err);

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
    logic [N-1:0][W-1:0] e;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < N; i++) begin
        x[i] = $urandom;
        if (i == 0) x[i] = 32'h8000_0000;
        if (i == 1) x[i] = 32'h7FFF_FFFF;
        if (i == 2) x[i] = '0;
        e[i] = $signed(x[i]) > 0 ? x[i] : '0;
      end
      fc = 2'(t % 4); fm = $urandom | 32'h100;
      iv = 1'b1;
      @(negedge clk); iv = 1'b0;
      check(ov && y == e, "ReLU of the row");
      check(err == (fc != 0), "err flags an outvoted copy");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
