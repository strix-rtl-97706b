// tb_shield_group: self-checking test of the shield group.
//
// Two shapes are checked by sg_check: the 16 x 16 default (I = 16, J = 1: K = 1 shield,
// sigma = 32 + 1 + 4 = 37 cycles, inside L_SA = 47) and an 8 x 8 array of 2 x 2-PE tiles
// (I = 4, J = 2: K = 2 shields, sigma = 8 + 1 + 2 = 11, inside L_SA = 15).
module tb_shield_group;
  logic clk = 1'b0, rst_n = 1'b0, go = 1'b0;
  logic f0, f1;
  int unsigned c0, c1, e0, e1;

  sg_check #(.I(16), .J(1), .K_EXP(1), .SIGMA_EXP(37)) u_def (.clk, .rst_n, .go, .finished(f0), .checks(c0), .failures(e0));
  sg_check #(.I(4),  .J(2), .K_EXP(2), .SIGMA_EXP(11)) u_til (.clk, .rst_n, .go, .finished(f1), .checks(c1), .failures(e1));

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
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, e0 + e1);
    $finish;
  end
endmodule
