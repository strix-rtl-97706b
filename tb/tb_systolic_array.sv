// tb_systolic_array: self-checking test of the weight-stationary systolic array.
//
// Two shapes are checked by sa_check: the 16 x 16 default (I = 16 tiles of J = 1 PE,
// latency 31, window L_SA = 47) and an 8 x 8 array of 4 x 4 tiles of 2 x 2 PEs (I = 4,
// J = 2: latency 7, window 15), which exercises the combinational PEs inside a tile.
module tb_systolic_array;
  logic clk = 1'b0, rst_n = 1'b0, go = 1'b0;
  logic f0, f1;
  int unsigned c0, c1, e0, e1;
  int unsigned checks, failures;

  sa_check #(.I(16), .J(1)) u_def (.clk, .rst_n, .go, .finished(f0), .checks(c0), .failures(e0));
  sa_check #(.I(4),  .J(2)) u_til (.clk, .rst_n, .go, .finished(f1), .checks(c1), .failures(e1));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, e0 + e1 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); go = 1'b1;
    wait (f0 && f1);
    checks = c0 + c1; failures = e0 + e1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
