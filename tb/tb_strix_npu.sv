// tb_strix_npu: end-to-end test of the Strix NPU at its default size (16 x 16 array,
// 256 KB scratchpad, 64 KB accumulator), no parameter overrides.
//
// The testbench plays host and DMA engine. It moves blocks A (input), B (weights) and D
// (bias) in, runs preload / compute (the station inserts the precompute) / mvout, and
// compares every output block with C = A x B + D computed here, with and without ReLU.
// Each reliability mechanism is then provoked through the fault-injection ports:
//   scratchpad bit flip          -> corrected by verifier + corrector (result still exact)
//   two flips in one row         -> detected, not correctable (error flag)
//   guardpad checksum flip       -> blamed on the checksum, data untouched, checksum rewritten
//   accumulator bit flip         -> corrected on mvout
//   masked checksums             -> a flip in a covered bit is still corrected
//   transient PE flip            -> ABFT mismatch in one element, corrected by the shields
//   stuck-at PE                  -> ABFT detects an uncorrectable block, localises the tile
//   queued command bit flip      -> SEC-DED corrects; double flip -> command dropped
//   configuration register flip  -> SEC-DED corrects
//   one ReLU / pooling copy hit  -> outvoted by TMR
//   softmax / LayerNorm outputs  -> sum invariants pass for good rows, flag bad ones
// and finally mvout_error_block must report the logged locations. Every mechanism is
// counted and a mechanism that never happened counts as a failure.
module tb_strix_npu;
  import strix_pkg::*;
  localparam int unsigned N = 16;
  int unsigned checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready;
  cmd_t cmd = '0;
  logic dma_in_valid = 1'b0, dma_in_ready, dma_out_valid, busy, err_irq;
  logic [N-1:0][31:0] dma_in_data = '0, dma_out_data;
  strix_counters_t cnt;
  logic [3:0] tile_col;
  logic sm_valid = 1'b0, sm_err, ln_valid = 1'b0, ln_err, pool_valid = 1'b0, pool_ov;
  logic [N-1:0][15:0] sm_p = '0, ln_x = '0;
  logic [3:0][31:0] pool_x = '0;
  logic [31:0] pool_y;
  logic fi_spad_en = 1'b0, fi_acc_en = 1'b0, fi_gp_en = 1'b0, fi_pe_en = 1'b0, fi_rs_en = 1'b0;
  logic [13:0] fi_spad_addr = '0;
  logic [9:0]  fi_acc_addr = '0;
  logic [10:0] fi_gp_addr = '0;
  logic [N-1:0][7:0]  fi_spad_mask = '0, fi_gp_mask = '0;
  logic [N-1:0][31:0] fi_acc_mask = '0;
  logic [1:0] fi_pe_kind = '0, fi_cfg_idx = '0, fi_tmr_copy = '0;
  logic [3:0] fi_pe_row = '0, fi_pe_col = '0;
  logic [4:0] fi_pe_bit = '0;
  logic [2:0] fi_rs_idx = '0;
  logic [CMD_W+$clog2(CMD_W+1):0] fi_rs_mask = '0;
  logic [38:0] fi_cfg_mask = '0;
  logic [31:0] fi_tmr_mask = '0;

  strix_npu dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .dma_in_valid, .dma_in_ready, .dma_in_data,
    .dma_out_valid, .dma_out_data, .busy, .counters(cnt), .err_irq, .array_fault_tile_col(tile_col),
    .sm_valid, .sm_p, .sm_err, .ln_valid, .ln_x, .ln_err, .pool_valid, .pool_x,
    .pool_out_valid(pool_ov), .pool_y,
    .fi_spad_en, .fi_spad_addr, .fi_spad_mask, .fi_acc_en, .fi_acc_addr, .fi_acc_mask,
    .fi_gp_en, .fi_gp_addr, .fi_gp_mask, .fi_pe_en, .fi_pe_kind, .fi_pe_row, .fi_pe_col,
    .fi_pe_bit, .fi_rs_en, .fi_rs_idx, .fi_rs_mask, .fi_cfg_idx, .fi_cfg_mask,
    .fi_tmr_copy, .fi_tmr_mask);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- host / DMA model
  typedef logic signed [7:0]  blk8_t  [N][N];
  typedef logic signed [31:0] blk32_t [N][N];

  logic [N-1:0][31:0] out_rows [$];
  always @(posedge clk) if (dma_out_valid) out_rows.push_back(dma_out_data);

  int unsigned n_precomp = 0, n_csfix = 0;
  always @(posedge clk) if (dut.csfix == 2'd1) n_csfix++;   // recomputed checksums written back
  always @(posedge clk) if (dut.rs_out_valid && dut.rs_out_ready && dut.rs_cmd.op == OP_PRECOMP) n_precomp++;

  task automatic send(input cmd_t c);
    @(negedge clk);
    cmd_valid = 1'b1; cmd = c;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy || cmd_valid) @(negedge clk);
    @(negedge clk);
  endtask

  function automatic cmd_t mk(input opcode_e op, input int a, input int b, input bit acc = 0, input bit relu = 0);
    cmd_t c;
    c = '0; c.op = op; c.addr_a = ADDR_W'(a); c.addr_b = ADDR_W'(b); c.accumulate = acc; c.relu = relu;
    return c;
  endfunction

  task automatic mvin8(input int addr, input blk8_t m);
    send(mk(OP_MVIN, addr, 0));
    for (int r = 0; r < N; r++) begin
      dma_in_valid = 1'b1;
      for (int j = 0; j < N; j++) dma_in_data[j] = 32'(m[r][j]);
      @(posedge clk);
      while (!dma_in_ready) @(posedge clk);
      @(negedge clk);
    end
    dma_in_valid = 1'b0;
    wait_idle();
  endtask

  task automatic mvin32(input int addr, input blk32_t m);
    send(mk(OP_MVIN_ACC, addr, 0));
    for (int r = 0; r < N; r++) begin
      dma_in_valid = 1'b1;
      for (int j = 0; j < N; j++) dma_in_data[j] = m[r][j];
      @(posedge clk);
      while (!dma_in_ready) @(posedge clk);
      @(negedge clk);
    end
    dma_in_valid = 1'b0;
    wait_idle();
  endtask

  task automatic mvout(input int addr, input bit relu, output blk32_t m);
    out_rows.delete();
    send(mk(OP_MVOUT, addr, 0, 0, relu));
    wait_idle();
    check(out_rows.size() == N, $sformatf("mvout delivered %0d rows", out_rows.size()));
    for (int r = 0; r < N; r++)
      for (int j = 0; j < N; j++) m[r][j] = (r < out_rows.size()) ? out_rows[r][j] : 32'hDEAD;
  endtask

  task automatic set_cfg(input logic [1:0] idx, input logic [31:0] v);
    cmd_t c;
    c = mk(OP_CONFIG, 0, 0); c.cfg_idx = idx; c.cfg_data = v;
    send(c);
    wait_idle();
  endtask

  // preload B, compute C (+D) into the accumulator, read it back and compare
  task automatic matmul(input int a_addr, input int b_addr, input int c_addr, input bit acc);
    send(mk(OP_PRELOAD, b_addr, 0));
    send(mk(OP_COMPUTE, a_addr, c_addr, acc));
    wait_idle();
  endtask

  function automatic void ref_mm(input blk8_t a, input blk8_t b, input blk32_t d, input bit acc, input bit relu, output blk32_t c);
    for (int r = 0; r < N; r++)
      for (int j = 0; j < N; j++) begin
        logic signed [31:0] s;
        s = acc ? d[r][j] : 0;
        for (int k = 0; k < N; k++) s += 32'(a[r][k]) * 32'(b[k][j]);
        c[r][j] = (relu && s < 0) ? 0 : s;
      end
  endfunction

  function automatic int unsigned ndiff(input blk32_t x, input blk32_t y);
    int unsigned n;
    n = 0;
    for (int r = 0; r < N; r++) for (int j = 0; j < N; j++) if (x[r][j] !== y[r][j]) n++;
    return n;
  endfunction

  // ---------------------------------------------------------------- stimulus
  blk8_t  A, B, A2, Bp;
  blk32_t D, C, E, Z;
  strix_counters_t c0;
  int unsigned mech_spad = 0, mech_uncorr = 0, mech_cs = 0, mech_acc = 0, mech_mask = 0,
               mech_pe_t = 0, mech_pe_s = 0, mech_rs = 0, mech_rs2 = 0, mech_cfg = 0,
               mech_relu = 0, mech_pool = 0, mech_sm = 0, mech_ln = 0, mech_accum = 0,
               mech_errout = 0, mech_csfix = 0;

  initial begin
    for (int r = 0; r < N; r++)
      for (int j = 0; j < N; j++) begin
        A[r][j] = 8'($urandom); B[r][j] = 8'($urandom); D[r][j] = 32'($urandom_range(200000)) - 100000;
        A2[r][j] = 8'($urandom_range(100)); Bp[r][j] = 8'($urandom_range(100));
        Z[r][j] = 0;
      end
    A[0][0] = -8'sd128; B[0][0] = -8'sd128;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---- 1. clean run: A at 0, B at 16, A2 at 32, Bp at 48, D at accumulator 0
    mvin8(0, A); mvin8(16, B); mvin8(32, A2); mvin8(48, Bp); mvin32(0, D);
    check(cnt == '0 && !err_irq, "clean moves raise no event");
    matmul(0, 16, 0, 1);
    mvout(0, 0, C);
    ref_mm(A, B, D, 1, 0, E);
    check(ndiff(C, E) == 0, $sformatf("C = A x B + D (%0d elements differ)", ndiff(C, E)));
    mech_accum++;
    check(n_precomp == 1, "compute was preceded by a precompute");
    mvout(0, 1, C);
    ref_mm(A, B, D, 1, 1, E);
    check(ndiff(C, E) == 0, "ReLU on mvout");
    matmul(0, 16, 16, 0);
    mvout(16, 0, C);
    ref_mm(A, B, D, 0, 0, E);
    check(ndiff(C, E) == 0, "C = A x B without accumulation");
    check(cnt == '0 && !err_irq, "clean compute raises no event");

    // ---- 2. scratchpad single-bit fault in A, read during the precompute
    c0 = cnt;
    fi_spad_en = 1'b1; fi_spad_addr = 14'd5; fi_spad_mask = '0; fi_spad_mask[7] = 8'h10;
    matmul(0, 16, 32, 0);
    fi_spad_en = 1'b0;
    mvout(32, 0, C);
    ref_mm(A, B, D, 0, 0, E);
    check(ndiff(C, E) == 0, "scratchpad fault corrected before use");
    check(cnt.mem_corrected == c0.mem_corrected + 1, "memory correction counted");
    if (cnt.mem_corrected > c0.mem_corrected) mech_spad++;

    // ---- 3. scratchpad fault in a weight row during preload
    c0 = cnt;
    fi_spad_en = 1'b1; fi_spad_addr = 14'd16 + 14'd9; fi_spad_mask = '0; fi_spad_mask[2] = 8'h01;
    matmul(0, 16, 32, 0);
    fi_spad_en = 1'b0;
    mvout(32, 0, C);
    check(ndiff(C, E) == 0, "weight fault corrected before preload");
    if (cnt.mem_corrected == c0.mem_corrected + 1) mech_spad++;

    // ---- 4. guardpad fault: the stored checksum of A's block is wrong
    c0 = cnt;
    fi_gp_en = 1'b1; fi_gp_addr = 11'd1; fi_gp_mask = '0; fi_gp_mask[4] = 8'h08;  // column checksums of block 0
    matmul(0, 16, 32, 0);
    fi_gp_en = 1'b0;
    mvout(32, 0, C);
    check(ndiff(C, E) == 0, "checksum fault leaves the data alone");
    check(cnt.mem_cs_fault == c0.mem_cs_fault + 1 && cnt.mem_corrected == c0.mem_corrected, "blamed on the checksum");
    if (cnt.mem_cs_fault > c0.mem_cs_fault) mech_cs++;
    // the recomputed checksums were written back, and the block reads clean again
    c0 = cnt;
    matmul(0, 16, 32, 0);
    check(cnt == c0, "after the repair the block reads clean");
    if (cnt == c0 && n_csfix == 1) mech_csfix++;

    // ---- 5. two flips in one row of A: detected, not correctable
    c0 = cnt;
    fi_spad_en = 1'b1; fi_spad_addr = 14'd3; fi_spad_mask = '0; fi_spad_mask[1] = 8'h04; fi_spad_mask[6] = 8'h20;
    matmul(0, 16, 48, 0);
    fi_spad_en = 1'b0;
    check(cnt.mem_uncorr == c0.mem_uncorr + 1 && err_irq, "double fault in one row detected");
    if (cnt.mem_uncorr > c0.mem_uncorr) mech_uncorr++;

    // ---- 6. accumulator fault on mvout
    c0 = cnt;
    fi_acc_en = 1'b1; fi_acc_addr = 10'd32 + 10'd11; fi_acc_mask = '0; fi_acc_mask[13] = 32'h0004_0000;
    mvout(32, 0, C);
    fi_acc_en = 1'b0;
    check(ndiff(C, E) == 0, "accumulator fault corrected on mvout");
    if (cnt.mem_corrected == c0.mem_corrected + 1) mech_acc++;

    // ---- 7. checksum bit-selection mask: ignore the low nibble of elem_t data
    set_cfg(CFG_MASK_ELEM, 32'h0000_000F);
    mvin8(64, A);                                     // checksums now cover bits 7..4 only
    c0 = cnt;
    fi_spad_en = 1'b1; fi_spad_addr = 14'd64 + 14'd2; fi_spad_mask = '0; fi_spad_mask[12] = 8'h40;
    matmul(64, 16, 48, 0);
    fi_spad_en = 1'b0;
    mvout(48, 0, C);
    check(ndiff(C, E) == 0, "covered-bit fault corrected under a bit-selection mask");
    if (cnt.mem_corrected == c0.mem_corrected + 1) mech_mask++;
    set_cfg(CFG_MASK_ELEM, 32'h0);

    // ---- 8. transient PE fault: one element of C flipped, repaired by the shield group
    c0 = cnt;
    send(mk(OP_PRELOAD, 16, 0));
    send(mk(OP_COMPUTE, 0, 48, 0));
    @(negedge clk);
    while (!dut.sg_start) @(negedge clk);
    repeat (5) @(negedge clk);
    fi_pe_en = 1'b1; fi_pe_kind = 2'd0; fi_pe_row = 4'd0; fi_pe_col = 4'd0; fi_pe_bit = 5'd3;
    @(negedge clk); fi_pe_en = 1'b0;
    wait_idle();
    mvout(48, 0, C);
    check(ndiff(C, E) == 0, "transient PE fault corrected");
    check(cnt.abft_corrected == c0.abft_corrected + 1, "ABFT correction counted");
    if (cnt.abft_corrected > c0.abft_corrected) mech_pe_t++;

    // ---- 9. stuck-at-1 PE in tile column 9: detected, tile localised
    c0 = cnt;
    fi_pe_en = 1'b1; fi_pe_kind = 2'd2; fi_pe_row = 4'd4; fi_pe_col = 4'd9; fi_pe_bit = 5'd20;
    matmul(32, 48, 64, 0);                            // positive operands: bit 20 is 0 everywhere
    fi_pe_en = 1'b0;
    check(cnt.abft_uncorr == c0.abft_uncorr + 1, "stuck-at PE detected");
    check(tile_col == 4'd9, $sformatf("faulty tile column %0d localised", tile_col));
    if (cnt.abft_uncorr > c0.abft_uncorr && tile_col == 4'd9) mech_pe_s++;
    matmul(32, 48, 64, 0);
    mvout(64, 0, C);
    ref_mm(A2, Bp, D, 0, 0, E);
    check(ndiff(C, E) == 0, "fault-free after the stuck-at is released");

    // ---- 10. queued command upsets (reservation station ECC)
    c0 = cnt;
    send(mk(OP_MVOUT, 64, 0));                        // keeps the controller busy
    begin
      cmd_t cc;
      int unsigned slot;
      cc = mk(OP_CONFIG, 0, 0); cc.cfg_idx = CFG_CONST0; cc.cfg_data = 32'h0000_B172;  // ln2 in Q1.15
      slot = dut.u_rs.wp[2:0];
      send(cc);
      fi_rs_en = 1'b1; fi_rs_idx = 3'(slot); fi_rs_mask = '0; fi_rs_mask[5] = 1'b1;
      @(negedge clk); fi_rs_en = 1'b0;
      wait_idle();
      check(dut.cfg_q[CFG_CONST0] == 32'h0000_B172, "corrupted queued command corrected");
      check(cnt.reg_corrected > c0.reg_corrected, "register correction counted");
      if (cnt.reg_corrected > c0.reg_corrected) mech_rs++;
      // double upset: dropped
      c0 = cnt;
      send(mk(OP_MVOUT, 64, 0));
      cc.cfg_idx = CFG_CONST1; cc.cfg_data = 32'h1234_5678;
      slot = dut.u_rs.wp[2:0];
      send(cc);
      fi_rs_en = 1'b1; fi_rs_idx = 3'(slot); fi_rs_mask = '0; fi_rs_mask[5] = 1'b1; fi_rs_mask[9] = 1'b1;
      @(negedge clk); fi_rs_en = 1'b0;
      wait_idle();
      check(dut.cfg_q[CFG_CONST1] == 32'h0, "corrupted command dropped");
      check(cnt.reg_uncorr == c0.reg_uncorr + 1, "uncorrectable register error counted");
      if (cnt.reg_uncorr > c0.reg_uncorr) mech_rs2++;
    end
    out_rows.delete();

    // ---- 11. configuration register upset
    c0 = cnt;
    @(negedge clk);
    fi_cfg_idx = CFG_CONST0; fi_cfg_mask = '0; fi_cfg_mask[17] = 1'b1;
    @(negedge clk); fi_cfg_mask = '0;
    @(negedge clk);
    check(dut.cfg_q[CFG_CONST0] == 32'h0000_B172, "configuration register repaired");
    check(cnt.reg_corrected == c0.reg_corrected + 1, "configuration correction counted");
    if (cnt.reg_corrected > c0.reg_corrected) mech_cfg++;

    // ---- 12. TMR: one ReLU copy hit during mvout, one pooling copy hit
    c0 = cnt;
    fi_tmr_copy = 2'd2; fi_tmr_mask = 32'h0000_0100;
    mvout(0, 1, C);
    ref_mm(A, B, D, 1, 1, E);
    check(ndiff(C, E) == 0, "ReLU copy fault outvoted");
    check(cnt.tmr_masked == c0.tmr_masked + N, "each outvoted row counted");
    if (cnt.tmr_masked > c0.tmr_masked) mech_relu++;
    c0 = cnt;
    @(negedge clk);
    pool_valid = 1'b1; pool_x[0] = 32'd5; pool_x[1] = -32'd7; pool_x[2] = 32'd90; pool_x[3] = 32'd89;
    @(negedge clk); pool_valid = 1'b0;
    check(pool_ov && pool_y == 32'd90, "max pooling result");
    @(negedge clk);
    check(cnt.tmr_masked == c0.tmr_masked + 1, "pooling copy fault outvoted");
    if (cnt.tmr_masked > c0.tmr_masked) mech_pool++;
    fi_tmr_copy = 2'd0; fi_tmr_mask = '0;

    // ---- 13. softmax and LayerNorm invariants
    for (int t = 0; t < 2; t++) begin
      @(negedge clk);
      sm_valid = 1'b1; ln_valid = 1'b1;
      for (int i = 0; i < N; i++) begin sm_p[i] = 16'd2048; ln_x[i] = (i % 2) ? 16'd300 : -16'sd300; end
      if (t == 1) begin sm_p[3] = 16'd6000; ln_x[5] = 16'd1300; end
      @(negedge clk); sm_valid = 1'b0; ln_valid = 1'b0;
      check(sm_err == (t == 1), "softmax sum check");
      check(ln_err == (t == 1), "LayerNorm sum check");
      if (t == 1 && sm_err) mech_sm++;
      if (t == 1 && ln_err) mech_ln++;
    end

    // ---- 14. mvout_error_block
    out_rows.delete();
    send(mk(OP_MVOUT_ERR, 0, 0));
    wait_idle();
    check(out_rows.size() == 16, "error block streamed out");
    begin
      bit seen_spad, seen_acc, seen_arr, seen_reg;
      seen_spad = 0; seen_acc = 0; seen_arr = 0; seen_reg = 0;
      foreach (out_rows[i]) if (out_rows[i][0][18]) begin
        err_src_e s;
        s = err_src_e'(out_rows[i][0][17:16]);
        check(out_rows[i][1] >= 1 && out_rows[i][2] == 32'(i + 1), "entry has Id and Times");
        if (s == SRC_SPAD && out_rows[i][0][15:0] == 16'd5)  seen_spad = 1;
        if (s == SRC_ACC  && out_rows[i][0][15:0] == 16'd43) seen_acc = 1;
        if (s == SRC_ARRAY && out_rows[i][0][15:0] == 16'd9) seen_arr = 1;
        if (s == SRC_REG) seen_reg = 1;
      end
      check(seen_spad && seen_acc && seen_arr && seen_reg, "faulty scratchpad row, accumulator row, tile and register logged");
      if (seen_spad && seen_acc && seen_arr && seen_reg) mech_errout++;
    end

    // ---- mechanism tally
    $display("mechanisms: spad-correct=%0d cs-fault=%0d cs-repair=%0d mem-uncorr=%0d acc-correct=%0d mask=%0d",
             mech_spad, mech_cs, mech_csfix, mech_uncorr, mech_acc, mech_mask);
    $display("            precompute=%0d accumulate=%0d pe-transient=%0d pe-stuck=%0d rs-correct=%0d rs-drop=%0d cfg=%0d",
             n_precomp, mech_accum, mech_pe_t, mech_pe_s, mech_rs, mech_rs2, mech_cfg);
    $display("            relu-tmr=%0d pool-tmr=%0d softmax=%0d layernorm=%0d error-block=%0d",
             mech_relu, mech_pool, mech_sm, mech_ln, mech_errout);
    check(mech_spad == 2, "scratchpad correction happened");
    check(mech_cs == 1, "checksum fault happened");
    check(mech_csfix == 1, "checksum repair happened");
    check(mech_uncorr == 1, "uncorrectable memory error happened");
    check(mech_acc == 1, "accumulator correction happened");
    check(mech_mask == 1, "bit-selection mask exercised");
    check(n_precomp >= 10, "precompute sub-instructions issued");
    check(mech_accum == 1, "accumulation happened");
    check(mech_pe_t == 1, "ABFT correction happened");
    check(mech_pe_s == 1, "ABFT detection and tile localisation happened");
    check(mech_rs == 1 && mech_rs2 == 1, "command queue ECC correction and drop happened");
    check(mech_cfg == 1, "configuration ECC correction happened");
    check(mech_relu == 1 && mech_pool == 1, "TMR voting happened");
    check(mech_sm == 1 && mech_ln == 1, "invariant checks fired");
    check(mech_errout == 1, "error block read out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
