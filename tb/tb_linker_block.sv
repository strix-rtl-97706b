// tb_linker_block: self-checking test of the linker block.
//
// Blocks of the scratchpad and of the accumulator are linked in random order. A lookup of
// any row address must return valid only for blocks that have been linked on the same
// side, and the guardpad row 2 x (row address / 16) of the block's row-checksum vector.
// Addresses beyond the memory must never be valid.
module tb_linker_block;
  localparam int unsigned N = 16, SR = 16384, AR = 1024;
  int unsigned checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0, link = 1'b0, link_acc = 1'b0, lk_acc = 1'b0, lk_valid;
  logic [15:0] link_addr = '0, lk_addr = '0, lk_gaddr;
  linker_block dut (.clk, .rst_n, .link, .link_acc, .link_addr, .lk_acc, .lk_addr, .lk_valid, .lk_gaddr);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit s_ref [SR / N];
  bit a_ref [AR / N];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    lk_acc = 1'b0; lk_addr = 16'd32; #1;
    check(!lk_valid, "nothing linked after reset");
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      link = ($urandom_range(3) == 0);
      link_acc = $urandom_range(1);
      link_addr = link_acc ? 16'($urandom_range(AR - 1)) : 16'($urandom_range(SR - 1));
      if (link) begin
        if (link_acc) a_ref[link_addr / N] = 1'b1; else s_ref[link_addr / N] = 1'b1;
      end
      lk_acc = $urandom_range(1);
      lk_addr = 16'($urandom_range(lk_acc ? AR + 63 : SR - 1));
      #1;
      check(lk_gaddr == 16'(2 * (lk_addr / N)), "guardpad address of the block");
      if (lk_acc) check(lk_valid == ((lk_addr < AR) && a_ref[lk_addr / N]), $sformatf("acc valid %0d", lk_addr));
      else        check(lk_valid == s_ref[lk_addr / N], $sformatf("spad valid %0d", lk_addr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
