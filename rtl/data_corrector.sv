// data_corrector: locates and repairs faulty elements of a checked block, and forwards the
// block from its data buffer.
//
// While the data verifier recomputes checksums, the same N rows are written into the
// corrector's data buffer. When the verifier reports, the error pinpoint logic decides:
//   * no mismatch                          -> GS_OK
//   * mismatching rows but no columns, or columns but no rows -> GS_CS_FAULT: the stored
//     checksum is wrong, the data is left alone (no false-positive correction)
//   * otherwise cross-localisation: row r and column c are paired when both mismatch with
//     the same delta. If every mismatching row and every mismatching column has exactly one
//     partner, each pair (r,c) is a single faulty element and is repaired by subtracting the
//     delta from its selected bits -> GS_CORRECTED. A single row/column pair is the simple
//     case of this rule. Anything else -> GS_UNCORR (detected, data forwarded unchanged).
// The repaired block then streams out, one row per cycle with its index (the "revised data
// & laddr" of the paper). err_row/err_col give the first located element for the error log.
//
// Timing: `check` (the verifier's done) is accepted when no drain is in progress; the
// decision (status_valid) follows one cycle later and the N rows stream out on the N cycles
// after that. Follows the paper's corrector (pinpoint, data buffer, delta correction,
// checksum-only mismatch rule); the pairing-by-equal-delta formulation is this design's
// reading of the paper's cross-localisation.
module data_corrector #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          in_valid,
  input  logic [N-1:0][W-1:0]           in_row,
  input  logic [W-1:0]                  mask,
  input  logic                          check,
  input  logic [N-1:0]                  row_mm,
  input  logic [N-1:0]                  col_mm,
  input  logic [N-1:0][W-1:0]           row_delta,
  input  logic [N-1:0][W-1:0]           col_delta,
  output logic                          status_valid,
  output strix_pkg::guard_status_e      status,
  output logic [$clog2(N)-1:0]          err_row,
  output logic [$clog2(N)-1:0]          err_col,
  output logic [$clog2(N*N+1)-1:0]      n_fixed,
  output logic                          out_valid,
  output logic [$clog2(N)-1:0]          out_idx,
  output logic [N-1:0][W-1:0]           out_row
);
  import strix_pkg::*;
  localparam int unsigned IW = $clog2(N);

  logic [N-1:0][N-1:0][W-1:0] buffer;
  logic [IW:0]                wr_cnt;
  logic                       draining;
  logic [IW:0]                rd_cnt;
  logic [IW:0]                wr_idx;   // buffer row of the incoming row

  assign wr_idx = clear ? '0 : wr_cnt;

  // error pinpoint (combinational)
  logic [N-1:0][N-1:0]        match;
  guard_status_e              dec;
  logic [IW-1:0]              first_r, first_c;
  logic [$clog2(N*N+1)-1:0]   nfix;

  always_comb begin
    logic any_r, any_c, ok;
    int unsigned cnt;
    any_r   = |row_mm;
    any_c   = |col_mm;
    ok      = 1'b1;
    first_r = '0;
    first_c = '0;
    nfix    = '0;
    for (int unsigned r = 0; r < N; r++)
      for (int unsigned c = 0; c < N; c++)
        match[r][c] = row_mm[r] && col_mm[c] && (row_delta[r] == col_delta[c]);
    for (int unsigned r = 0; r < N; r++) begin
      cnt = 0;
      for (int unsigned c = 0; c < N; c++) cnt += 32'(match[r][c]);
      if (row_mm[r] && cnt != 1) ok = 1'b0;
    end
    for (int unsigned c = 0; c < N; c++) begin
      cnt = 0;
      for (int unsigned r = 0; r < N; r++) cnt += 32'(match[r][c]);
      if (col_mm[c] && cnt != 1) ok = 1'b0;
    end
    for (int r = N - 1; r >= 0; r--)
      for (int c = N - 1; c >= 0; c--)
        if (match[r][c]) begin
          first_r = IW'(r);
          first_c = IW'(c);
        end
    for (int unsigned r = 0; r < N; r++)
      for (int unsigned c = 0; c < N; c++) nfix += ($clog2(N*N+1))'(match[r][c]);
    if (!any_r && !any_c)      dec = GS_OK;
    else if (!any_r || !any_c) dec = GS_CS_FAULT;
    else if (ok)               dec = GS_CORRECTED;
    else                       dec = GS_UNCORR;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buffer       <= '0;
      wr_cnt       <= '0;
      draining     <= 1'b0;
      rd_cnt       <= '0;
      status_valid <= 1'b0;
      status       <= GS_OK;
      err_row      <= '0;
      err_col      <= '0;
      n_fixed      <= '0;
      out_valid    <= 1'b0;
      out_idx      <= '0;
      out_row      <= '0;
    end else begin
      status_valid <= 1'b0;
      out_valid    <= 1'b0;
      if (clear) wr_cnt <= '0;
      if (in_valid) begin
        buffer[wr_idx[IW-1:0]] <= in_row;
        wr_cnt <= wr_idx + 1'b1;
      end
      if (check && !draining) begin
        status       <= dec;
        status_valid <= 1'b1;
        err_row      <= first_r;
        err_col      <= first_c;
        n_fixed      <= (dec == GS_CORRECTED) ? nfix : '0;
        if (dec == GS_CORRECTED) begin
          for (int unsigned r = 0; r < N; r++)
            for (int unsigned c = 0; c < N; c++)
              if (match[r][c])
                buffer[r][c] <= (buffer[r][c] & ~mask) | (((buffer[r][c] & mask) - row_delta[r]) & mask);
        end
        draining <= 1'b1;
        rd_cnt   <= '0;
      end else if (draining) begin
        out_valid <= 1'b1;
        out_idx   <= rd_cnt[IW-1:0];
        out_row   <= buffer[rd_cnt[IW-1:0]];
        if (rd_cnt == (IW+1)'(N - 1)) draining <= 1'b0;
        rd_cnt <= rd_cnt + 1'b1;
      end
    end
  end
endmodule
