// data_verifier: recomputes the checksums of a block on its way out of memory and compares
// them with the stored ones.
//
// The N rows read from the scratchpad or accumulator stream through a private
// checksum_adder (the verifier's own adder trees and adder-register units). One cycle after
// the last row, the recomputed row and column checksums are compared with the stored
// vectors (fetched from the guardpad, or predicted by the shield group for the systolic
// array's results). For every row and column the verifier reports whether it mismatched
// and the discrepancy delta = recomputed - stored (mod 2^W), which is the value the data
// corrector subtracts from a located faulty element.
//
// Timing: clear with the first row; `done` and the result vectors are valid two cycles after
// the N-th row, and hold until the next block. The stored vectors must be stable when the
// last row has been accepted. Follows the paper's data verifier; the delta form of the
// "errorsum" signal is this design's choice.
module data_verifier #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  in_valid,
  input  logic [N-1:0][W-1:0]   in_row,
  input  logic [W-1:0]          mask,
  input  logic [N-1:0][W-1:0]   stored_row_cs,
  input  logic [N-1:0][W-1:0]   stored_col_cs,
  output logic                  done,
  output logic [N-1:0]          row_mm,
  output logic [N-1:0]          col_mm,
  output logic [N-1:0][W-1:0]   row_delta,
  output logic [N-1:0][W-1:0]   col_delta,
  output logic [N-1:0][W-1:0]   calc_row_cs,
  output logic [N-1:0][W-1:0]   calc_col_cs
);
  logic cs_done;

  checksum_adder #(.N(N), .W(W)) u_adder (
    .clk, .rst_n, .clear, .in_valid, .in_row, .mask,
    .row_sums(calc_row_cs), .col_sums(calc_col_cs), .done(cs_done));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done      <= 1'b0;
      row_mm    <= '0;
      col_mm    <= '0;
      row_delta <= '0;
      col_delta <= '0;
    end else begin
      done <= cs_done;
      if (cs_done) begin
        for (int unsigned i = 0; i < N; i++) begin
          row_delta[i] <= calc_row_cs[i] - stored_row_cs[i];
          col_delta[i] <= calc_col_cs[i] - stored_col_cs[i];
          row_mm[i]    <= (calc_row_cs[i] != stored_row_cs[i]);
          col_mm[i]    <= (calc_col_cs[i] != stored_col_cs[i]);
        end
      end
    end
  end
endmodule
