// strix_pkg: types, opcodes and sizing functions shared by the Strix NPU blocks.
//
// The command set mirrors the Gemmini-style instruction stream the design protects
// (mvin, preload, compute, mvout) plus the two reliability additions: the precompute
// sub-instruction, which the reservation station derives from every compute, and
// mvout_error_block, which reads the fault log out. Encodings and field widths are this
// design's own choice; the paper names the instructions but gives no encoding.
//
// shield_count(), shield_tree_term() and tree_stages() evaluate the paper's shield sizing equations:
// the number K of shields needed so that the shield group's latency stays inside the
// systolic array's matrix window, and the adder-tree depth term of that latency.
package strix_pkg;

  // Row address width used for scratchpad, accumulator and guardpad addresses.
  localparam int unsigned ADDR_W = 16;
  // Number of SEC-DED protected configuration registers.
  localparam int unsigned NUM_CFG = 4;

  typedef enum logic [2:0] {
    OP_CONFIG    = 3'd0,  // write an ECC-protected configuration register
    OP_MVIN      = 3'd1,  // DMA -> scratchpad (elem_t block), checksums -> guardpad
    OP_MVIN_ACC  = 3'd2,  // DMA -> accumulator (acc_t block, the bias D)
    OP_PRELOAD   = 3'd3,  // scratchpad block B -> stationary weights (WS mode)
    OP_COMPUTE   = 3'd4,  // C = A x B (+ D when accumulating), ABFT checked
    OP_MVOUT     = 3'd5,  // accumulator block -> DMA, verified, optional ReLU
    OP_MVOUT_ERR = 3'd6,  // stream the error block out
    OP_PRECOMP   = 3'd7   // precompute sub-instruction (generated, never sent by host)
  } opcode_e;

  typedef struct packed {
    opcode_e              op;
    logic [ADDR_W-1:0]    addr_a;      // spad/acc row address of the first block row
    logic [ADDR_W-1:0]    addr_b;      // second address (accumulator row for compute)
    logic                 accumulate;  // compute: add into the accumulator block
    logic                 relu;        // mvout: apply ReLU on the way out
    logic [1:0]           cfg_idx;     // config: register index
    logic [31:0]          cfg_data;    // config: register value
  } cmd_t;

  localparam int unsigned CMD_W = $bits(cmd_t);

  // Configuration register indices.
  localparam logic [1:0] CFG_MASK_ELEM = 2'd0;  // checksum bit-selection mask, elem_t
  localparam logic [1:0] CFG_MASK_ACC  = 2'd1;  // checksum bit-selection mask, acc_t
  localparam logic [1:0] CFG_CONST0    = 2'd2;  // software constant (e.g. ln2)
  localparam logic [1:0] CFG_CONST1    = 2'd3;  // software constant

  // Outcome of a block check (memory read or ABFT result check).
  typedef enum logic [1:0] {
    GS_OK        = 2'd0,  // all checksums match
    GS_CORRECTED = 2'd1,  // data errors located and repaired
    GS_CS_FAULT  = 2'd2,  // only one checksum direction mismatched: checksum is bad
    GS_UNCORR    = 2'd3   // mismatches that cannot be paired: detected, not corrected
  } guard_status_e;

  // Where a logged fault was seen.
  typedef enum logic [1:0] {
    SRC_SPAD  = 2'd0,
    SRC_ACC   = 2'd1,
    SRC_ARRAY = 2'd2,
    SRC_REG   = 2'd3
  } err_src_e;

  // Event counters of the reliability mechanisms, exported by the top for monitoring.
  typedef struct packed {
    logic [15:0] mem_corrected;   // local-memory blocks repaired by the corrector
    logic [15:0] mem_cs_fault;    // local-memory blocks whose stored checksum was wrong
    logic [15:0] mem_uncorr;      // local-memory blocks with uncorrectable errors
    logic [15:0] abft_corrected;  // array results repaired from shield checksums
    logic [15:0] abft_uncorr;     // array results with uncorrectable mismatches
    logic [15:0] reg_corrected;   // single-bit register/queue errors corrected
    logic [15:0] reg_uncorr;      // multi-bit register/queue errors detected
    logic [15:0] tmr_masked;      // non-linear TMR disagreements outvoted
  } strix_counters_t;

  // Number of check bits of the register SEC-DED code: ceil(log2(alpha+1)) + 1.
  function automatic int unsigned secded_check_bits(input int unsigned alpha);
    return $clog2(alpha + 1) + 1;
  endfunction

  // max{0, floor( (1/J) * log2 ceil(I*J / 2^J) )} from the shield latency equation.
  function automatic int unsigned shield_tree_term(input int unsigned i, input int unsigned j);
    int unsigned groups;
    int unsigned fl;
    groups = (i * j + (1 << j) - 1) >> j;
    fl = 0;
    while ((groups >> (fl + 1)) != 0) fl++;  // floor(log2(groups))
    return fl / j;
  endfunction

  // K = ceil( 2IJ / (IJ + 2I - 3 - tree_term) ), the minimum shield parallelism.
  function automatic int unsigned shield_count(input int unsigned i, input int unsigned j);
    int unsigned den;
    den = i * j + 2 * i - 3 - shield_tree_term(i, j);
    return (2 * i * j + den - 1) / den;
  endfunction

  // Systolic array matrix window L_SA = IJ + 2I - 1.
  function automatic int unsigned array_window(input int unsigned i, input int unsigned j);
    return i * j + 2 * i - 1;
  endfunction

  // Registered stages of a shield adder tree whose stages each add 2^J inputs
  // (combinational depth per stage capped at J adders, as the PEs of a tile).
  function automatic int unsigned tree_stages(input int unsigned n, input int unsigned j);
    int unsigned s;
    int unsigned m;
    s = 0;
    m = n;
    while (m > 1) begin
      m = (m + (1 << j) - 1) >> j;
      s++;
    end
    return (s == 0) ? 1 : s;
  endfunction

endpackage
