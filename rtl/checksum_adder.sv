// checksum_adder: one-pass row and column checksums of an N-row block.
//
// The block streams in one row (N lanes of W bits) per cycle. An adder tree sums the lanes
// of the current row into that row's checksum, and one adder-register unit per lane
// accumulates the column checksums over the rows, so after N rows both checksum vectors are
// ready without a second pass over the data. Sums are plain binary additions modulo 2^W
// (no arithmetic meaning is needed; overflow is harmless because the same wrap-around is used
// when the sums are recomputed for checking). `mask` selects which bits of each element are
// covered: ignored bits are cleared before the addition, the bit-selection policy the paper
// leaves to the developer.
//
// Interface: pulse `clear` (may coincide with the first row) to start a block; rows arrive
// with in_valid. Timing: row_sums/col_sums are complete, and `done` pulses, one cycle after
// the N-th row. Follows the paper's local-memory checksum adder (adder trees for rows,
// adder-register units for columns); the wrap-around width W equal to the element width is
// this design's choice.
module checksum_adder #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  in_valid,
  input  logic [N-1:0][W-1:0]   in_row,
  input  logic [W-1:0]          mask,
  output logic [N-1:0][W-1:0]   row_sums,
  output logic [N-1:0][W-1:0]   col_sums,
  output logic                  done
);
  localparam int unsigned CW = $clog2(N + 1);

  logic [CW-1:0] cnt;
  logic [W-1:0]  tree_sum;
  logic [CW-1:0] idx;       // row index of the incoming row (0 when a new block starts)

  assign idx = clear ? '0 : cnt;

  // adder tree over the lanes of the incoming row
  always_comb begin
    tree_sum = '0;
    for (int unsigned j = 0; j < N; j++) tree_sum = tree_sum + (in_row[j] & mask);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      row_sums <= '0;
      col_sums <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        cnt      <= '0;
        row_sums <= '0;
        col_sums <= '0;
      end
      if (in_valid) begin
        row_sums[idx[$clog2(N)-1:0]] <= tree_sum;
        for (int unsigned j = 0; j < N; j++)
          col_sums[j] <= (clear ? '0 : col_sums[j]) + (in_row[j] & mask);
        if (idx == CW'(N - 1)) begin
          cnt  <= '0;
          done <= 1'b1;
        end else begin
          cnt <= idx + 1'b1;
        end
      end
    end
  end
endmodule
