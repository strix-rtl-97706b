// tb_shield: self-checking test of a single shield.
//
// Random INT8 vectors x are streamed one per cycle against random 32-bit checksum vectors v
// (held for a run, as the shield group holds rsB or csA). Each output must equal the
// modulo-2^32 dot product x . v, in order, with a latency of 1 + tree_stages(N, J) cycles:
// 5 for N = 16, J = 1 (four 2-input stages) and 3 for N = 8, J = 2 (two 4-input stages).
module tb_shield;
  localparam int unsigned NA = 16, NB = 8;
  int unsigned checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0, iv = 1'b0, ova, ovb;
  logic [NA-1:0][7:0] xa = '0;  logic [NA-1:0][31:0] va = '0;  logic [31:0] sa;
  logic [NB-1:0][7:0] xb = '0;  logic [NB-1:0][31:0] vb = '0;  logic [31:0] sb;
  shield #(.N(NA), .J(1)) dut_a (.clk, .rst_n, .in_valid(iv), .x(xa), .v(va), .out_valid(ova), .sum(sa));
  shield #(.N(NB), .J(2)) dut_b (.clk, .rst_n, .in_valid(iv), .x(xb), .v(vb), .out_valid(ovb), .sum(sb));

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

  logic [31:0] qa [$];
  logic [31:0] qb [$];
  int unsigned cyc = 0, na = 0, nb = 0;
  int unsigned tin [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (iv) tin.push_back(cyc);
    if (ova && rst_n) begin  // outputs before reset are not meaningful
      int unsigned t0;
      t0 = tin.pop_front();
      check(cyc - t0 == 1 + strix_pkg::tree_stages(NA, 1) && cyc - t0 == 5, $sformatf("latency %0d (N=16, J=1)", cyc - t0));
      check(qa.size() > 0 && sa == qa.pop_front(), "dot product (N=16, J=1)");
      na++;
    end
    if (ovb && rst_n) begin
      check(qb.size() > 0 && sb == qb.pop_front(), "dot product (N=8, J=2)");
      nb++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 20; run++) begin
      @(negedge clk); iv = 1'b0;
      for (int k = 0; k < NA; k++) va[k] = (run == 0) ? 32'hFFFF_FF80 : $urandom;
      for (int k = 0; k < NB; k++) vb[k] = $urandom;
      for (int t = 0; t < 32; t++) begin
        logic [31:0] ea, eb;
        @(negedge clk);
        iv = (t % 9 != 8);
        ea = '0; eb = '0;
        for (int k = 0; k < NA; k++) begin xa[k] = (run == 0) ? 8'h80 : 8'($urandom); ea += 32'(signed'(xa[k])) * va[k]; end
        for (int k = 0; k < NB; k++) begin xb[k] = 8'($urandom); eb += 32'(signed'(xb[k])) * vb[k]; end
        if (iv) begin qa.push_back(ea); qb.push_back(eb); end
      end
    end
    @(negedge clk); iv = 1'b0;
    repeat (10) @(negedge clk);
    check(qa.size() == 0 && qb.size() == 0 && na > 500, "every vector produced a sum");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
