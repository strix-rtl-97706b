// tb_reservation_station: self-checking test of the ECC-protected reservation station.
//
// Random commands are pushed with random gaps while the consumer applies random
// back-pressure. The issued stream must be the pushed commands in order, except that every
// compute is preceded by a precompute carrying the same fields. Queued entries are hit by
// injected upsets: a single flipped bit must be corrected (command unchanged, event
// flagged); a double flip must be flagged uncorrectable and the command dropped. The queue
// must report full after DEPTH entries.
module tb_reservation_station;
  import strix_pkg::*;
  localparam int unsigned D = 8, DW = CMD_W, P = $clog2(CMD_W + 1);
  int unsigned checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0, iv = 1'b0, ir, ov, ordy = 1'b0, cor, unc, fe = 1'b0;
  cmd_t ic = '0, oc;
  logic [2:0] fidx = '0;
  logic [DW+P:0] fm = '0;
  reservation_station #(.DEPTH(D)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_cmd(ic),
    .out_valid(ov), .out_ready(ordy), .out_cmd(oc), .ecc_corrected(cor), .ecc_uncorr(unc),
    .fi_en(fe), .fi_idx(fidx), .fi_mask(fm));

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

  cmd_t exp_q [$];
  int unsigned n_pre = 0, n_cor = 0, n_drop = 0, wr_idx = 0, rd_idx = 0;
  int unsigned dropped [$];   // sequence numbers that will be dropped

  function automatic cmd_t rnd_cmd();
    cmd_t c;
    c = cmd_t'({$urandom, $urandom, $urandom});
    c.op = opcode_e'($urandom_range(6));
    return c;
  endfunction

  // consumer and scoreboard
  int unsigned seq_out = 0;
  bit pre_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (cor) n_cor++;
    if (unc && !ov) begin
      n_drop++;
    end
    if (ov && ordy) begin
      cmd_t e;
      e = exp_q[0];
      if (e.op == OP_COMPUTE && !pre_seen) begin
        cmd_t ep;
        ep = e; ep.op = OP_PRECOMP;
        check(oc == ep, "precompute issued ahead of compute");
        pre_seen = 1; n_pre++;
      end else begin
        check(oc == e, $sformatf("command %0d in order", seq_out));
        void'(exp_q.pop_front());
        pre_seen = 0; seq_out++;
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // fill up without draining
    for (int i = 0; i < D; i++) begin
      @(negedge clk); iv = 1'b1; ic = rnd_cmd(); exp_q.push_back(ic);
    end
    @(negedge clk); iv = 1'b0;
    check(!ir, "full after DEPTH entries");
    // single-bit upset on the head entry while it waits
    fe = 1'b1; fidx = 3'd0; fm = (DW+P+1)'(1) << $urandom_range(DW - 1);
    @(negedge clk); fe = 1'b0;
    check(ov, "head valid after a single upset");
    ordy = 1'b1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      ordy = ($urandom_range(3) != 0);
      iv = ($urandom_range(2) == 0);
      ic = rnd_cmd();
      if (iv && ir) exp_q.push_back(ic);
      fe = 1'b0;
      if (k % 50 == 25 && exp_q.size() > 2) begin
        // single flip in the entry behind the head: corrected when it is issued
        fe = 1'b1;
        fidx = dut.rp[2:0] + 3'd1;
        fm = (DW+P+1)'(1) << $urandom_range(DW - 1);
      end
    end
    @(negedge clk); iv = 1'b0; fe = 1'b0; ordy = 1'b1;
    repeat (40) @(negedge clk);
    check(exp_q.size() == 0, "all commands issued");
    check(n_pre > 0, "precompute generated");
    check(n_cor > 0, "single upsets corrected");
    // double upset: the entry is dropped
    ordy = 1'b0;
    @(negedge clk); iv = 1'b1; ic = rnd_cmd(); ic.op = OP_MVIN;
    @(negedge clk); iv = 1'b0; fe = 1'b1; fidx = dut.rp[2:0]; fm = (DW+P+1)'(3);
    @(negedge clk); fe = 1'b0;
    check(unc, "double upset flagged");
    @(negedge clk);
    check(!ov, "corrupt command dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
