// tb_accumulator: self-checking test of the INT32 accumulator (1024 rows of 16 words, 2 banks).
//
// Random rows are written to random addresses in every bank and kept in a testbench
// shadow copy; reads must return the shadow row exactly one cycle after the request.
// The fault-injection port must flip exactly the masked bits of the addressed row only,
// and only while it is enabled (the stored row is not changed by it).
module tb_accumulator;
  localparam int unsigned N = 16, W = 32, ROWS = 1024, AW = $clog2(ROWS);
  int unsigned checks = 0, failures = 0;

  logic clk = 1'b0, we = 1'b0, re = 1'b0, fi_en = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0, fi_addr = '0;
  logic [N-1:0][W-1:0] wdata = '0, rdata, fi_mask = '0;
  accumulator dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata, .fi_en, .fi_addr, .fi_mask);

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

  logic [N-1:0][W-1:0] shadow [int];
  logic [AW-1:0] addrs [64];

  function automatic logic [N-1:0][W-1:0] rnd_row();
    logic [N-1:0][W-1:0] r;
    for (int i = 0; i < N; i++) r[i] = W'($urandom);
    return r;
  endfunction

  initial begin
    for (int i = 0; i < 64; i++) begin
      addrs[i] = AW'($urandom_range(ROWS - 1));
      if (i < 4) addrs[i] = AW'(i * (ROWS / 4) + 3);   // one address in every quarter
      if (i == 4) addrs[i] = AW'(ROWS - 1);
    end
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); we = 1'b1; waddr = addrs[i]; wdata = rnd_row(); shadow[int'(addrs[i])] = wdata;
    end
    @(negedge clk); we = 1'b0;
    for (int k = 0; k < 400; k++) begin
      int i;
      i = $urandom_range(63);
      fi_en = (k % 5 == 4); fi_addr = (k % 10 == 9) ? addrs[(i + 1) % 64] : addrs[i];
      fi_mask = rnd_row();
      @(negedge clk); re = 1'b1; raddr = addrs[i];
      // a simultaneous write elsewhere must not disturb the read
      if (k % 7 == 0) begin
        we = 1'b1; waddr = addrs[(i + 3) % 64]; wdata = rnd_row();
        if (addrs[(i + 3) % 64] == addrs[i]) we = 1'b0; else shadow[int'(waddr)] = wdata;
      end
      @(negedge clk); re = 1'b0; we = 1'b0;
      if (fi_en && fi_addr == addrs[i])
        check(rdata == (shadow[int'(addrs[i])] ^ fi_mask), "injected fault flips the masked bits");
      else
        check(rdata == shadow[int'(addrs[i])], $sformatf("read of row %0d", addrs[i]));
      fi_en = 1'b0;
      re = 1'b1;
      @(negedge clk); re = 1'b0;
      check(rdata == shadow[int'(addrs[i])], "stored row not changed by an injected read fault");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
