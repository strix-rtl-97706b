// strix_npu: a weight-stationary INT8 NPU with the Strix reliability safeguards.
//
// The NPU core (ECC-protected reservation station, local memory, systolic array) is
// partitioned along its inference pipeline and each part carries its own guard:
//   * registers    - the command queue and the configuration registers use a SEC-DED code;
//   * local memory - every N x N block written by mvin or by a compute write-back gets row
//                    and column checksums in the guardpad (checksum adder on the write
//                    path); every block read is re-summed by a data verifier and repaired
//                    by a data corrector before it is used; faults are logged in the
//                    error block;
//   * systolic array - a shield group predicts the row/column checksums of A x B while the
//                    array computes it, the result is checked and repaired (ABFT style) before
//                    it is written to the accumulator;
//   * non-linear   - ReLU on the mvout path and max pooling are triplicated and voted;
//                    softmax and LayerNorm outputs are checked by their sum invariants.
//
// Commands (strix_pkg::cmd_t) enter through cmd_valid/cmd_ready. Operation sequence:
//   OP_MVIN/OP_MVIN_ACC  N rows arrive on dma_in (one per cycle while dma_in_ready); they are
//                        written to scratchpad/accumulator, checksummed, and linked.
//   OP_PRELOAD           block B is read and verified, loaded into the array's weights and
//                        the transposer, and its row checksums are formed for the shields.
//   OP_COMPUTE           the station issues a precompute first: block A (and the bias block
//                        D in the accumulator when `accumulate`) is read, verified and
//                        corrected, and A's column checksums are formed. The compute then
//                        streams A into the array and the shield group together, checks
//                        and corrects C, adds D and writes C+D back with fresh checksums.
//   OP_MVOUT             an accumulator block is read, verified, optionally passed through
//                        the TMR ReLU, and sent out on dma_out (N rows, one per cycle).
//   OP_MVOUT_ERR         the error block is sent out, one entry per dma_out row:
//                        lane 0 = {valid, source, location}, lane 1 = times, lane 2 = Id.
//   OP_CONFIG            writes one of the SEC-DED protected configuration registers:
//                        0/1 = checksum bit-ignore masks of elem_t/acc_t data (a set bit is
//                        left out of the checksums; reset 0 = every bit covered), 2/3 =
//                        software constants.
// All addresses are row addresses and must be multiples of N. dma_out has no back-pressure.
//
// Stages run one after another in this design; the paper overlaps the precompute of the
// next instruction group with the compute of the current one (its four-stage pipeline),
// which this controller does not do. The sizes are the paper's INT8 default configuration:
// 16 x 16 array of 1-PE tiles, 256 KB scratchpad, 64 KB accumulator.
// The fi_* ports are the fault-injection hooks the paper adds for evaluation.
// rst_n is an asynchronous reset for the registers and also appears in the `disable iff`
// of the two assertions below; lint therefore sees it used both ways. That is intended:
// the assertions are only switched off while reset is asserted.
module strix_npu
  import strix_pkg::*;
#(
  parameter int unsigned I       = 16,      // tiles per array row
  parameter int unsigned J       = 1,       // PEs per tile row
  parameter int unsigned S_ROWS  = 16384,   // scratchpad rows (256 KB at 16 B per row)
  parameter int unsigned A_ROWS  = 1024,    // accumulator rows (64 KB at 64 B per row)
  parameter int unsigned RS_DEPTH = 8,
  parameter int unsigned ERR_ENTRIES = 16,
  parameter int unsigned POOL_P  = 4,
  parameter int unsigned N       = I * J
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // command interface
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  cmd_t                      cmd,
  // DMA streams (the DMA engine itself is outside this design)
  input  logic                      dma_in_valid,
  output logic                      dma_in_ready,
  input  logic [N-1:0][31:0]        dma_in_data,
  output logic                      dma_out_valid,
  output logic [N-1:0][31:0]        dma_out_data,
  output logic                      busy,
  // monitoring
  output strix_counters_t           counters,
  output logic                      err_irq,        // any uncorrectable error seen
  output logic [$clog2(N)-1:0]      array_fault_tile_col,  // last localised faulty tile column
  // non-linear unit guards (the softmax/LayerNorm units are outside this design)
  input  logic                      sm_valid,
  input  logic [N-1:0][15:0]        sm_p,
  output logic                      sm_err,
  input  logic                      ln_valid,
  input  logic [N-1:0][15:0]        ln_x,
  output logic                      ln_err,
  input  logic                      pool_valid,
  input  logic [POOL_P-1:0][31:0]   pool_x,
  output logic                      pool_out_valid,
  output logic [31:0]               pool_y,
  // fault injection
  input  logic                      fi_spad_en,
  input  logic [$clog2(S_ROWS)-1:0] fi_spad_addr,
  input  logic [N-1:0][7:0]         fi_spad_mask,
  input  logic                      fi_acc_en,
  input  logic [$clog2(A_ROWS)-1:0] fi_acc_addr,
  input  logic [N-1:0][31:0]        fi_acc_mask,
  input  logic                      fi_gp_en,
  input  logic [$clog2(2*S_ROWS/N)-1:0] fi_gp_addr,
  input  logic [N-1:0][7:0]         fi_gp_mask,
  input  logic                      fi_pe_en,
  input  logic [1:0]                fi_pe_kind,
  input  logic [$clog2(N)-1:0]      fi_pe_row,
  input  logic [$clog2(N)-1:0]      fi_pe_col,
  input  logic [4:0]                fi_pe_bit,
  input  logic                      fi_rs_en,
  input  logic [$clog2(RS_DEPTH)-1:0] fi_rs_idx,
  input  logic [CMD_W+$clog2(CMD_W+1):0] fi_rs_mask,
  input  logic [1:0]                fi_cfg_idx,
  input  logic [32+$clog2(33):0]    fi_cfg_mask,
  input  logic [1:0]                fi_tmr_copy,
  input  logic [31:0]               fi_tmr_mask
);
  localparam int unsigned IW   = $clog2(N);
  localparam int unsigned SAW  = $clog2(S_ROWS);
  localparam int unsigned AAW  = $clog2(A_ROWS);
  localparam int unsigned GE_ROWS = 2 * S_ROWS / N;
  localparam int unsigned GA_ROWS = 2 * A_ROWS / N;
  localparam int unsigned GEW  = $clog2(GE_ROWS);
  localparam int unsigned GAW  = $clog2(GA_ROWS);

  typedef enum logic [4:0] {
    S_IDLE, S_CFG, S_MVIN, S_MVIN_CS, S_MVIN_GP1, S_MVIN_GP2,
    S_RD, S_RD_WAIT, S_RD_DRAIN, S_RD_NEXT,
    S_CMP_RUN, S_CMP_WAIT, S_CMP_DRAIN, S_WB_CS, S_WB_GP1, S_WB_GP2, S_ERR_OUT
  } state_e;

  typedef enum logic [1:0] {P_PRELOAD, P_A, P_D, P_MVOUT} purpose_e;

  state_e   st;
  cmd_t     cur;
  purpose_e purpose;
  logic     rd_acc;          // guarded read source: 0 scratchpad, 1 accumulator
  logic [ADDR_W-1:0] rd_base;
  logic [IW:0] cnt;
  logic     rd_linked;
  logic [1:0] csfix;         // checksum repair writes pending (2 rows)

  // ------------------------------------------------------------------ registers (ECC)
  logic     rs_out_valid, rs_out_ready, rs_corr, rs_unc;
  cmd_t     rs_cmd;

  reservation_station #(.DEPTH(RS_DEPTH)) u_rs (
    .clk, .rst_n, .in_valid(cmd_valid), .in_ready(cmd_ready), .in_cmd(cmd),
    .out_valid(rs_out_valid), .out_ready(rs_out_ready), .out_cmd(rs_cmd),
    .ecc_corrected(rs_corr), .ecc_uncorr(rs_unc),
    .fi_en(fi_rs_en), .fi_idx(fi_rs_idx), .fi_mask(fi_rs_mask));

  logic [NUM_CFG-1:0][31:0] cfg_q;
  logic [NUM_CFG-1:0]       cfg_corr, cfg_cf, cfg_unc;
  for (genvar g = 0; g < NUM_CFG; g++) begin : g_cfg
    ecc_reg #(.ALPHA(32)) u_cfg (
      .clk, .rst_n,
      .we(st == S_CFG && cur.cfg_idx == 2'(g)), .d(cur.cfg_data),
      .fi_flip((fi_cfg_idx == 2'(g)) ? fi_cfg_mask : '0),
      .q(cfg_q[g]), .corrected(cfg_corr[g]), .check_fault(cfg_cf[g]),
      .uncorrectable(cfg_unc[g]));
  end
  logic [7:0]  mask_e;
  logic [31:0] mask_a;
  assign mask_e = ~cfg_q[CFG_MASK_ELEM][7:0];
  assign mask_a = ~cfg_q[CFG_MASK_ACC];

  // ------------------------------------------------------------------ local memory
  logic                 sp_we, sp_re;
  logic [SAW-1:0]       sp_waddr, sp_raddr;
  logic [N-1:0][7:0]    sp_wdata, sp_rdata;
  logic                 ac_we, ac_re;
  logic [AAW-1:0]       ac_waddr, ac_raddr;
  logic [N-1:0][31:0]   ac_wdata, ac_rdata;

  scratchpad #(.N(N), .W(8), .ROWS(S_ROWS)) u_spad (
    .clk, .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata), .re(sp_re), .raddr(sp_raddr),
    .rdata(sp_rdata), .fi_en(fi_spad_en), .fi_addr(fi_spad_addr), .fi_mask(fi_spad_mask));

  accumulator #(.N(N), .W(32), .ROWS(A_ROWS)) u_acc (
    .clk, .we(ac_we), .waddr(ac_waddr), .wdata(ac_wdata), .re(ac_re), .raddr(ac_raddr),
    .rdata(ac_rdata), .fi_en(fi_acc_en), .fi_addr(fi_acc_addr), .fi_mask(fi_acc_mask));

  logic                 ge_we, ge_re, ga_we, ga_re;
  logic [GEW-1:0]       ge_waddr, ge_raddr;
  logic [GAW-1:0]       ga_waddr, ga_raddr;
  logic [N-1:0][7:0]    ge_wdata, ge_rdata;
  logic [N-1:0][31:0]   ga_wdata, ga_rdata;

  guardpad #(.N(N), .WE(8), .WA(32), .E_ROWS(GE_ROWS), .A_ROWS(GA_ROWS)) u_gpad (
    .clk,
    .e_we(ge_we), .e_waddr(ge_waddr), .e_wdata(ge_wdata), .e_re(ge_re), .e_raddr(ge_raddr),
    .e_rdata(ge_rdata), .e_fi_en(fi_gp_en), .e_fi_addr(fi_gp_addr), .e_fi_mask(fi_gp_mask),
    .a_we(ga_we), .a_waddr(ga_waddr), .a_wdata(ga_wdata), .a_re(ga_re), .a_raddr(ga_raddr),
    .a_rdata(ga_rdata), .a_fi_en(1'b0), .a_fi_addr('0), .a_fi_mask('0));

  logic              lk_link, lk_link_acc, lk_valid;
  logic [ADDR_W-1:0] lk_link_addr, lk_gaddr;
  linker_block #(.N(N), .S_ROWS(S_ROWS), .A_ROWS(A_ROWS), .AW(ADDR_W)) u_link (
    .clk, .rst_n, .link(lk_link), .link_acc(lk_link_acc), .link_addr(lk_link_addr),
    .lk_acc(rd_acc), .lk_addr(rd_base), .lk_valid(lk_valid), .lk_gaddr(lk_gaddr));

  logic                 eb_rep;
  err_src_e             eb_src;
  logic [15:0]          eb_loc;
  logic [$clog2(ERR_ENTRIES)-1:0] eb_idx;
  logic                 eb_rd_valid, eb_overflow;
  err_src_e             eb_rd_src;
  logic [15:0]          eb_rd_loc;
  logic [7:0]           eb_rd_times;
  logic [$clog2(ERR_ENTRIES+1)-1:0] eb_n;
  error_block #(.ENTRIES(ERR_ENTRIES)) u_errblk (
    .clk, .rst_n, .rep_valid(eb_rep), .rep_src(eb_src), .rep_loc(eb_loc),
    .rd_idx(eb_idx), .rd_valid(eb_rd_valid), .rd_src(eb_rd_src), .rd_loc(eb_rd_loc),
    .rd_times(eb_rd_times), .n_entries(eb_n), .overflow(eb_overflow));

  // write-path checksum adders (elem_t and acc_t)
  logic               csw_e_clr, csw_e_v, csw_e_done;
  logic [N-1:0][7:0]  csw_e_row, csw_e_cs, csw_e_rcs;
  checksum_adder #(.N(N), .W(8)) u_csw_e (
    .clk, .rst_n, .clear(csw_e_clr), .in_valid(csw_e_v), .in_row(csw_e_row), .mask(mask_e),
    .row_sums(csw_e_rcs), .col_sums(csw_e_cs), .done(csw_e_done));
  logic               csw_a_clr, csw_a_v, csw_a_done;
  logic [N-1:0][31:0] csw_a_row, csw_a_cs, csw_a_rcs;
  checksum_adder #(.N(N), .W(32)) u_csw_a (
    .clk, .rst_n, .clear(csw_a_clr), .in_valid(csw_a_v), .in_row(csw_a_row), .mask(mask_a),
    .row_sums(csw_a_rcs), .col_sums(csw_a_cs), .done(csw_a_done));

  // read-path verifiers and correctors
  logic               rv_q, rv_first_q, rv_acc_q;     // read data returning this cycle
  logic [N-1:0][7:0]  st_e_rcs, st_e_ccs;
  logic [N-1:0][31:0] st_a_rcs, st_a_ccs;
  logic               g1_q, g2_q;                    // guardpad rows returning

  logic               ve_done, va_done;
  logic [N-1:0]       ve_rmm, ve_cmm, va_rmm, va_cmm;
  logic [N-1:0][7:0]  ve_rd, ve_cd, ve_crc, ve_ccc;
  logic [N-1:0][31:0] va_rd, va_cd, va_crc, va_ccc;

  data_verifier #(.N(N), .W(8)) u_ver_e (
    .clk, .rst_n, .clear(rv_first_q && !rv_acc_q), .in_valid(rv_q && !rv_acc_q),
    .in_row(sp_rdata), .mask(mask_e), .stored_row_cs(st_e_rcs), .stored_col_cs(st_e_ccs),
    .done(ve_done), .row_mm(ve_rmm), .col_mm(ve_cmm), .row_delta(ve_rd), .col_delta(ve_cd),
    .calc_row_cs(ve_crc), .calc_col_cs(ve_ccc));
  data_verifier #(.N(N), .W(32)) u_ver_a (
    .clk, .rst_n, .clear(rv_first_q && rv_acc_q), .in_valid(rv_q && rv_acc_q),
    .in_row(ac_rdata), .mask(mask_a), .stored_row_cs(st_a_rcs), .stored_col_cs(st_a_ccs),
    .done(va_done), .row_mm(va_rmm), .col_mm(va_cmm), .row_delta(va_rd), .col_delta(va_cd),
    .calc_row_cs(va_crc), .calc_col_cs(va_ccc));

  logic               ce_sv, ca_sv, ce_ov, ca_ov;
  guard_status_e      ce_st, ca_st;
  logic [IW-1:0]      ce_er, ce_ec, ca_er, ca_ec, ce_oi, ca_oi;
  logic [$clog2(N*N+1)-1:0] ce_nf, ca_nf;
  logic [N-1:0][7:0]  ce_row;
  logic [N-1:0][31:0] ca_row;

  // blocks without checksums (never written through the guarded path) pass unchecked
  data_corrector #(.N(N), .W(8)) u_cor_e (
    .clk, .rst_n, .clear(rv_first_q && !rv_acc_q), .in_valid(rv_q && !rv_acc_q),
    .in_row(sp_rdata), .mask(mask_e), .check(ve_done),
    .row_mm(rd_linked ? ve_rmm : '0), .col_mm(rd_linked ? ve_cmm : '0),
    .row_delta(ve_rd), .col_delta(ve_cd),
    .status_valid(ce_sv), .status(ce_st), .err_row(ce_er), .err_col(ce_ec), .n_fixed(ce_nf),
    .out_valid(ce_ov), .out_idx(ce_oi), .out_row(ce_row));
  data_corrector #(.N(N), .W(32)) u_cor_a (
    .clk, .rst_n, .clear(rv_first_q && rv_acc_q), .in_valid(rv_q && rv_acc_q),
    .in_row(ac_rdata), .mask(mask_a), .check(va_done),
    .row_mm(rd_linked ? va_rmm : '0), .col_mm(rd_linked ? va_cmm : '0),
    .row_delta(va_rd), .col_delta(va_cd),
    .status_valid(ca_sv), .status(ca_st), .err_row(ca_er), .err_col(ca_ec), .n_fixed(ca_nf),
    .out_valid(ca_ov), .out_idx(ca_oi), .out_row(ca_row));

  // common view of the active read path
  logic               rd_sv, rd_ov;
  guard_status_e      rd_st;
  logic [IW-1:0]      rd_er, rd_oi;
  logic [N-1:0][31:0] rd_row;      // corrected row, elem_t sign-extended
  always_comb begin
    rd_sv = rd_acc ? ca_sv : ce_sv;
    rd_st = rd_acc ? ca_st : ce_st;
    rd_er = rd_acc ? ca_er : ce_er;
    rd_ov = rd_acc ? ca_ov : ce_ov;
    rd_oi = rd_acc ? ca_oi : ce_oi;
    for (int unsigned j = 0; j < N; j++)
      rd_row[j] = rd_acc ? ca_row[j] : 32'($signed(ce_row[j]));
  end

  // ------------------------------------------------------------------ operand checksums
  logic               cso_clr, cso_v, cso_done;
  logic [N-1:0][31:0] cso_rcs, cso_ccs;
  checksum_adder #(.N(N), .W(32)) u_cs_op (
    .clk, .rst_n, .clear(cso_clr), .in_valid(cso_v), .in_row(rd_row), .mask('1),
    .row_sums(cso_rcs), .col_sums(cso_ccs), .done(cso_done));

  logic [N-1:0][31:0] rs_b, cs_a;
  logic [N-1:0][N-1:0][7:0]  a_buf;
  logic [N-1:0][N-1:0][31:0] d_buf;

  // ------------------------------------------------------------------ array and shields
  logic               pl_v;
  logic               arr_in_v, arr_out_v;
  logic [N-1:0][7:0]  arr_in_row, pl_row;
  logic [N-1:0][31:0] arr_out_row;
  logic [N-1:0][N-1:0][7:0] bt;

  always_comb begin
    for (int unsigned j = 0; j < N; j++) pl_row[j] = rd_row[j][7:0];
  end

  systolic_array #(.I(I), .J(J)) u_array (
    .clk, .rst_n, .preload_valid(pl_v), .preload_idx(rd_oi), .preload_row(pl_row),
    .in_valid(arr_in_v), .in_row(arr_in_row), .out_valid(arr_out_v), .out_row(arr_out_row),
    .fi_en(fi_pe_en), .fi_kind(fi_pe_kind), .fi_row(fi_pe_row), .fi_col(fi_pe_col),
    .fi_bit(fi_pe_bit));

  transposer #(.N(N)) u_trans (.clk, .we(pl_v), .widx(rd_oi), .wrow(pl_row), .bt(bt));

  logic               sg_start, sg_busy, sg_done;
  logic [N-1:0][31:0] sg_rcs, sg_ccs;
  shield_group #(.I(I), .J(J)) u_shields (
    .clk, .rst_n, .start(sg_start), .a_mat(a_buf), .bt_mat(bt), .rs_b(rs_b), .cs_a(cs_a),
    .row_cs(sg_rcs), .col_cs(sg_ccs), .busy(sg_busy), .done(sg_done));

  // ABFT check of the array result
  logic               ab_first, ab_done;
  logic [N-1:0]       ab_rmm, ab_cmm;
  logic [N-1:0][31:0] ab_rd, ab_cd, ab_crc, ab_ccc;
  logic               abc_sv, abc_ov;
  guard_status_e      abc_st;
  logic [IW-1:0]      abc_er, abc_ec, abc_oi;
  logic [$clog2(N*N+1)-1:0] abc_nf;
  logic [N-1:0][31:0] abc_row;

  data_verifier #(.N(N), .W(32)) u_ver_abft (
    .clk, .rst_n, .clear(arr_out_v && ab_first), .in_valid(arr_out_v), .in_row(arr_out_row),
    .mask('1), .stored_row_cs(sg_rcs), .stored_col_cs(sg_ccs),
    .done(ab_done), .row_mm(ab_rmm), .col_mm(ab_cmm), .row_delta(ab_rd), .col_delta(ab_cd),
    .calc_row_cs(ab_crc), .calc_col_cs(ab_ccc));
  data_corrector #(.N(N), .W(32)) u_cor_abft (
    .clk, .rst_n, .clear(arr_out_v && ab_first), .in_valid(arr_out_v), .in_row(arr_out_row),
    .mask('1), .check(ab_done), .row_mm(ab_rmm), .col_mm(ab_cmm), .row_delta(ab_rd),
    .col_delta(ab_cd), .status_valid(abc_sv), .status(abc_st), .err_row(abc_er),
    .err_col(abc_ec), .n_fixed(abc_nf), .out_valid(abc_ov), .out_idx(abc_oi),
    .out_row(abc_row));

  // the shield group must finish inside the array window (the paper's sizing rule for K)
  a_shield_in_window: assert property (@(posedge clk) disable iff (!rst_n)
    ab_done |-> !sg_busy);

  // earliest mismatching column: the faulty tile column in weight-stationary mode
  logic [IW-1:0] ab_first_col;
  always_comb begin
    ab_first_col = '0;
    for (int c = N - 1; c >= 0; c--) if (ab_cmm[c]) ab_first_col = IW'(c);
  end

  // ------------------------------------------------------------------ non-linear guards
  logic               relu_ov, relu_err;
  logic [N-1:0][31:0] relu_y;
  relu_tmr #(.N(N), .W(32)) u_relu (
    .clk, .rst_n, .in_valid(st == S_RD_DRAIN && purpose == P_MVOUT && rd_ov),
    .x(rd_row), .fi_copy(fi_tmr_copy), .fi_mask(fi_tmr_mask),
    .out_valid(relu_ov), .y(relu_y), .err(relu_err));
  logic               relu_sel_q;
  logic [N-1:0][31:0] raw_q;

  logic pool_err;
  maxpool_tmr #(.P(POOL_P), .W(32)) u_pool (
    .clk, .rst_n, .in_valid(pool_valid), .x(pool_x), .fi_copy(fi_tmr_copy),
    .fi_mask(fi_tmr_mask), .out_valid(pool_out_valid), .y(pool_y), .err(pool_err));

  logic sm_ov, ln_ov;
  logic [16+$clog2(N):0] sm_sum;
  logic signed [16+$clog2(N):0] ln_sum;
  softmax_guard #(.N(N), .W(16), .FRAC(15)) u_smg (
    .clk, .rst_n, .in_valid(sm_valid), .p(sm_p), .out_valid(sm_ov), .err(sm_err), .sum(sm_sum));
  layernorm_guard #(.N(N), .W(16)) u_lng (
    .clk, .rst_n, .in_valid(ln_valid), .xn(ln_x), .out_valid(ln_ov), .err(ln_err), .sum(ln_sum));

  // ------------------------------------------------------------------ control
  assign rs_out_ready = (st == S_IDLE);
  assign busy         = (st != S_IDLE) || rs_out_valid;
  assign dma_in_ready = (st == S_MVIN);

  logic              second;   // second guardpad row (column checksums)
  logic [ADDR_W-1:0] g;        // guardpad row being written

  always_comb begin
    second = 1'b0;
    g      = '0;
    // memory writes
    sp_we = 1'b0; sp_waddr = SAW'(cur.addr_a + ADDR_W'(cnt)); sp_wdata = '0;
    ac_we = 1'b0; ac_waddr = AAW'(cur.addr_a + ADDR_W'(cnt)); ac_wdata = '0;
    for (int unsigned j = 0; j < N; j++) begin
      sp_wdata[j] = dma_in_data[j][7:0];
      ac_wdata[j] = dma_in_data[j];
    end
    csw_e_clr = 1'b0; csw_e_v = 1'b0; csw_e_row = sp_wdata;
    csw_a_clr = 1'b0; csw_a_v = 1'b0; csw_a_row = ac_wdata;
    ge_we = 1'b0; ge_waddr = '0; ge_wdata = '0;
    ga_we = 1'b0; ga_waddr = '0; ga_wdata = '0;
    lk_link = 1'b0; lk_link_acc = 1'b0; lk_link_addr = cur.addr_a;
    // reads
    sp_re = 1'b0; sp_raddr = SAW'(rd_base + ADDR_W'(cnt));
    ac_re = 1'b0; ac_raddr = AAW'(rd_base + ADDR_W'(cnt));
    ge_re = 1'b0; ge_raddr = GEW'(lk_gaddr + ADDR_W'(cnt));
    ga_re = 1'b0; ga_raddr = GAW'(lk_gaddr + ADDR_W'(cnt));
    cso_clr = 1'b0; cso_v = 1'b0;
    pl_v = 1'b0;
    arr_in_v = 1'b0; arr_in_row = a_buf[cnt[IW-1:0]];
    sg_start = 1'b0;

    unique case (st)
      S_MVIN: begin
        if (dma_in_valid) begin
          if (cur.op == OP_MVIN_ACC) begin
            ac_we = 1'b1; csw_a_v = 1'b1; csw_a_clr = (cnt == 0);
          end else begin
            sp_we = 1'b1; csw_e_v = 1'b1; csw_e_clr = (cnt == 0);
          end
        end
      end
      S_MVIN_GP1, S_MVIN_GP2, S_WB_GP1, S_WB_GP2: begin
        second = (st == S_MVIN_GP2) || (st == S_WB_GP2);
        g = ADDR_W'(2 * (32'(st == S_WB_GP1 || st == S_WB_GP2 ? cur.addr_b : cur.addr_a) / N))
            + ADDR_W'(second);
        if (cur.op == OP_MVIN) begin
          ge_we = 1'b1; ge_waddr = GEW'(g); ge_wdata = second ? csw_e_cs : csw_e_rcs;
        end else begin
          ga_we = 1'b1; ga_waddr = GAW'(g); ga_wdata = second ? csw_a_cs : csw_a_rcs;
        end
        if (second) begin
          lk_link      = 1'b1;
          lk_link_acc  = (cur.op != OP_MVIN);
          lk_link_addr = (cur.op == OP_COMPUTE) ? cur.addr_b : cur.addr_a;
        end
      end
      S_RD: begin
        if (rd_acc) ac_re = 1'b1; else sp_re = 1'b1;
        if (cnt < (IW+1)'(2)) begin
          if (rd_acc) ga_re = 1'b1; else ge_re = 1'b1;
        end
      end
      S_RD_DRAIN: begin
        // checksum repair: the stored checksums were wrong, write the recomputed ones
        if (csfix != 0) begin
          if (rd_acc) begin
            ga_we = 1'b1; ga_waddr = GAW'(lk_gaddr) + GAW'(csfix == 2'd1);
            ga_wdata = (csfix == 2'd2) ? va_crc : va_ccc;
          end else begin
            ge_we = 1'b1; ge_waddr = GEW'(lk_gaddr) + GEW'(csfix == 2'd1);
            ge_wdata = (csfix == 2'd2) ? ve_crc : ve_ccc;
          end
        end
        if (rd_ov) begin
          cso_v   = (purpose == P_PRELOAD) || (purpose == P_A);
          cso_clr = (rd_oi == 0);
          pl_v    = (purpose == P_PRELOAD);
        end
      end
      S_CMP_RUN: begin
        sg_start = (cnt == 0);
        arr_in_v = (cnt < (IW+1)'(N));
      end
      S_CMP_DRAIN: begin
        if (abc_ov) begin
          ac_we    = 1'b1;
          ac_waddr = AAW'(cur.addr_b + ADDR_W'(abc_oi));
          for (int unsigned j = 0; j < N; j++)
            ac_wdata[j] = abc_row[j] + (cur.accumulate ? d_buf[abc_oi][j] : 32'd0);
          csw_a_v   = 1'b1;
          csw_a_clr = (abc_oi == 0);
          csw_a_row = ac_wdata;
        end
      end
      default: ;
    endcase
  end

  // error reporting into the error block
  always_comb begin
    eb_rep = 1'b0;
    eb_src = rd_acc ? SRC_ACC : SRC_SPAD;
    eb_loc = 16'(rd_base + ADDR_W'(rd_er));
    if (st == S_RD_WAIT && rd_sv && rd_st != GS_OK) begin
      eb_rep = 1'b1;
      if (rd_st == GS_CS_FAULT) eb_loc = 16'(lk_gaddr);   // guardpad row of the bad checksum
    end else if (st == S_CMP_WAIT && abc_sv && abc_st != GS_OK) begin
      eb_rep = 1'b1;
      eb_src = SRC_ARRAY;
      eb_loc = 16'(32'(ab_first_col) / J);                 // tile column
    end else if (|cfg_corr || |cfg_unc || rs_corr || rs_unc) begin
      eb_rep = 1'b1;
      eb_src = SRC_REG;
      eb_loc = 16'({cfg_unc, cfg_corr, rs_unc, rs_corr});
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      cur        <= '0;
      purpose    <= P_PRELOAD;
      rd_acc     <= 1'b0;
      rd_base    <= '0;
      cnt        <= '0;
      rd_linked  <= 1'b0;
      csfix      <= '0;
      rv_q       <= 1'b0;
      rv_first_q <= 1'b0;
      rv_acc_q   <= 1'b0;
      g1_q       <= 1'b0;
      g2_q       <= 1'b0;
      st_e_rcs   <= '0;
      st_e_ccs   <= '0;
      st_a_rcs   <= '0;
      st_a_ccs   <= '0;
      rs_b       <= '0;
      cs_a       <= '0;
      a_buf      <= '0;
      d_buf      <= '0;
      ab_first   <= 1'b1;
      counters   <= '0;
      err_irq    <= 1'b0;
      array_fault_tile_col <= '0;
      dma_out_valid <= 1'b0;
      dma_out_data  <= '0;
      relu_sel_q <= 1'b0;
      raw_q      <= '0;
      eb_idx     <= '0;
    end else begin
      // read pipeline bookkeeping (memory and guardpad have one cycle of latency)
      rv_q       <= (st == S_RD);
      rv_first_q <= (st == S_RD) && (cnt == 0);
      rv_acc_q   <= rd_acc;
      g1_q       <= (st == S_RD) && (cnt == 0);
      g2_q       <= (st == S_RD) && (cnt == 1);
      if (g1_q) begin st_e_rcs <= ge_rdata; st_a_rcs <= ga_rdata; end
      if (g2_q) begin st_e_ccs <= ge_rdata; st_a_ccs <= ga_rdata; end

      // operand checksums
      if (cso_done) begin
        if (purpose == P_PRELOAD) rs_b <= cso_rcs;
        else if (purpose == P_A)  cs_a <= cso_ccs;
      end

      // array result check: restart the row count for every compute
      if (arr_out_v) ab_first <= 1'b0;
      if (st == S_CMP_RUN && cnt == 0) ab_first <= 1'b1;

      // mvout path: rows leave through the TMR ReLU stage (one cycle)
      dma_out_valid <= 1'b0;
      relu_sel_q    <= cur.relu;
      raw_q         <= rd_row;
      if (relu_ov) begin
        dma_out_valid <= 1'b1;
        dma_out_data  <= relu_sel_q ? relu_y : raw_q;
        if (relu_err) counters.tmr_masked <= counters.tmr_masked + 1'b1;
      end

      // register ECC events
      if (|cfg_corr || rs_corr) counters.reg_corrected <= counters.reg_corrected + 1'b1;
      if (|cfg_unc || rs_unc) begin
        counters.reg_uncorr <= counters.reg_uncorr + 1'b1;
        err_irq <= 1'b1;
      end
      if (pool_err) counters.tmr_masked <= counters.tmr_masked + 1'b1;

      unique case (st)
        S_IDLE: begin
          cnt <= '0;
          if (rs_out_valid) begin
            cur <= rs_cmd;
            unique case (rs_cmd.op)
              OP_CONFIG:               st <= S_CFG;
              OP_MVIN, OP_MVIN_ACC:    st <= S_MVIN;
              OP_PRELOAD: begin
                purpose <= P_PRELOAD; rd_acc <= 1'b0; rd_base <= rs_cmd.addr_a; st <= S_RD;
              end
              OP_PRECOMP: begin
                purpose <= P_A; rd_acc <= 1'b0; rd_base <= rs_cmd.addr_a; st <= S_RD;
              end
              OP_COMPUTE:              st <= S_CMP_RUN;
              OP_MVOUT: begin
                purpose <= P_MVOUT; rd_acc <= 1'b1; rd_base <= rs_cmd.addr_a; st <= S_RD;
              end
              OP_MVOUT_ERR: begin
                eb_idx <= '0; st <= S_ERR_OUT;
              end
              default:                 st <= S_IDLE;
            endcase
          end
        end

        S_CFG: st <= S_IDLE;

        S_MVIN: begin
          if (dma_in_valid) begin
            if (cnt == (IW+1)'(N - 1)) st <= S_MVIN_CS;
            cnt <= cnt + 1'b1;
          end
        end
        S_MVIN_CS: if (csw_e_done || csw_a_done) st <= S_MVIN_GP1;
        S_MVIN_GP1: st <= S_MVIN_GP2;
        S_MVIN_GP2: st <= S_IDLE;

        S_RD: begin
          if (cnt == 0) rd_linked <= lk_valid;
          if (cnt == (IW+1)'(N - 1)) begin
            st  <= S_RD_WAIT;
            cnt <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_RD_WAIT: begin
          if (rd_sv) begin
            st    <= S_RD_DRAIN;
            csfix <= '0;
            unique case (rd_st)
              GS_CORRECTED: counters.mem_corrected <= counters.mem_corrected + 1'b1;
              GS_CS_FAULT: begin
                counters.mem_cs_fault <= counters.mem_cs_fault + 1'b1;
                csfix <= 2'd2;
              end
              GS_UNCORR: begin
                counters.mem_uncorr <= counters.mem_uncorr + 1'b1;
                err_irq <= 1'b1;
              end
              default: ;
            endcase
          end
        end
        S_RD_DRAIN: begin
          if (csfix != 0) csfix <= csfix - 1'b1;
          if (rd_ov) begin
            if (purpose == P_A) a_buf[rd_oi] <= pl_row;
            if (purpose == P_D) d_buf[rd_oi] <= rd_row;
            if (rd_oi == IW'(N - 1)) st <= S_RD_NEXT;
          end
        end
        S_RD_NEXT: begin
          // wait for the operand checksum adder, then chain the next step
          if (purpose == P_A && cur.accumulate) begin
            purpose <= P_D; rd_acc <= 1'b1; rd_base <= cur.addr_b; cnt <= '0; st <= S_RD;
          end else begin
            st <= S_IDLE;
          end
        end

        S_CMP_RUN: begin
          cnt <= cnt + 1'b1;
          if (cnt == (IW+1)'(N - 1)) st <= S_CMP_WAIT;
        end
        S_CMP_WAIT: begin
          if (abc_sv) begin
            st <= S_CMP_DRAIN;
            if (abc_st == GS_CORRECTED) counters.abft_corrected <= counters.abft_corrected + 1'b1;
            if (abc_st == GS_UNCORR || abc_st == GS_CS_FAULT) begin
              counters.abft_uncorr <= counters.abft_uncorr + 1'b1;
              err_irq <= 1'b1;
            end
            if (abc_st != GS_OK) array_fault_tile_col <= IW'(32'(ab_first_col) / J);
          end
        end
        S_CMP_DRAIN: if (abc_ov && abc_oi == IW'(N - 1)) st <= S_WB_CS;
        S_WB_CS:  if (csw_a_done) st <= S_WB_GP1;
        S_WB_GP1: st <= S_WB_GP2;
        S_WB_GP2: st <= S_IDLE;

        S_ERR_OUT: begin
          dma_out_valid   <= 1'b1;
          dma_out_data    <= '0;
          dma_out_data[0] <= {13'd0, eb_rd_valid, eb_rd_src, eb_rd_loc};
          dma_out_data[1] <= 32'(eb_rd_times);
          dma_out_data[2] <= 32'(eb_idx) + 1;
          eb_idx <= eb_idx + 1'b1;
          if (32'(eb_idx) == ERR_ENTRIES - 1) st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // block addresses must be aligned to the block size
  a_addr_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_IDLE && rs_out_valid) |-> (32'(rs_cmd.addr_a) % N == 0 && 32'(rs_cmd.addr_b) % N == 0));

  logic unused;
  assign unused = ^{sg_done, g, ce_nf, ca_nf, abc_nf, abc_er, abc_ec, ce_ec, ca_ec, ab_crc, ab_ccc,
                    cfg_cf, cfg_q[CFG_CONST0], cfg_q[CFG_CONST1], eb_n, eb_overflow, sm_ov,
                    sm_sum, ln_ov, ln_sum, csw_e_done, csw_a_done};
endmodule
