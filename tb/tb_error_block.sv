// tb_error_block: self-checking test of the error block (the fault log).
//
// Fault reports are drawn from a small set of (source, location) pairs so that repeats
// occur, as a permanent fault would produce. A testbench model keeps the expected table:
// a new pair takes the next free entry with Times = 1, a known pair increments its Times
// (saturating), and once the table is full new pairs are dropped and `overflow` is set.
// Every entry is read back through the read port after each report.
module tb_error_block;
  import strix_pkg::*;
  localparam int unsigned E = 16;
  int unsigned checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0, rv = 1'b0, rdv, ovf;
  err_src_e rs = SRC_SPAD, rds;
  logic [15:0] rl = '0, rdl;
  logic [3:0] ridx = '0;
  logic [7:0] rdt;
  logic [4:0] nent;
  error_block dut (.clk, .rst_n, .rep_valid(rv), .rep_src(rs), .rep_loc(rl), .rd_idx(ridx),
    .rd_valid(rdv), .rd_src(rds), .rd_loc(rdl), .rd_times(rdt), .n_entries(nent), .overflow(ovf));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  err_src_e m_src [E];
  logic [15:0] m_loc [E];
  int unsigned m_t [E];
  int unsigned m_n = 0;
  bit m_ovf = 0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    #1;
    check(nent == 0 && !ovf && !rdv, "empty after reset");
    for (int k = 0; k < 600; k++) begin
      int hit;
      @(negedge clk);
      rv = 1'b1;
      rs = err_src_e'($urandom_range(3));
      // few distinct pairs early (repeats, saturation), more later (overflow)
      rl = (k < 400) ? 16'($urandom_range(4)) : 16'($urandom_range(40));
      hit = -1;
      for (int i = 0; i < m_n; i++) if (m_src[i] == rs && m_loc[i] == rl) hit = i;
      if (hit >= 0) begin
        if (m_t[hit] < 255) m_t[hit]++;
      end else if (m_n < E) begin
        m_src[m_n] = rs; m_loc[m_n] = rl; m_t[m_n] = 1; m_n++;
      end else m_ovf = 1;
      @(negedge clk); rv = 1'b0;
      check(nent == 5'(m_n) && ovf == m_ovf, "entry count and overflow flag");
      if (k % 20 == 0 || k > 590)
        for (int i = 0; i < E; i++) begin
          ridx = 4'(i); #1;
          if (i < m_n) check(rdv && rds == m_src[i] && rdl == m_loc[i] && rdt == 8'(m_t[i]), $sformatf("entry %0d", i));
          else         check(!rdv, "unused entry invalid");
        end
    end
    check(m_ovf, "table filled up during the test");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
