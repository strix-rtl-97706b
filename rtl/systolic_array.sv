// systolic_array: weight-stationary INT8 systolic array, the matrix engine being protected.
//
// N = I*J PEs arranged as I x I tiles of J x J PEs. PE(k,j) holds weight B[k][j]; an input
// row a (element a[k] enters array row k) flows left to right and partial sums flow top to
// bottom, so column j leaves the array with c[j] = sum_k a[k]*B[k][j] (32-bit). Inside a
// tile the PEs are combinational; registers sit only on tile boundaries, as in Gemmini.
// Inputs are skewed by tile row and outputs deskewed by tile column, so a row of C leaves
// exactly 2I-1 cycles after its row of A entered: a full N x N matrix occupies the array for
// L_SA = I*J + 2I - 1 cycles from first input to last output, the window the paper uses to
// size the shield group.
//
// Interface: preload writes row preload_idx of B into the stationary weights (one row per
// cycle, N cycles for a block). in_valid/in_row stream A, one row per cycle;
// out_valid/out_row deliver C rows in the same order.
// Fault injection (the paper's permanent/transient injection hook): while fi_en is set, the
// partial-sum output of PE(fi_row, fi_col) has bit fi_bit flipped (fi_kind 0), forced to 0
// (1) or forced to 1 (2). Hold fi_en for a stuck-at fault, pulse it for a transient.
// The array is the Gemmini engine the paper builds on; only the weight-stationary mode is
// built here (output-stationary is not).
// The PE wires a_w/ps_w are two-dimensional arrays that each PE both reads and drives, so
// a simulator that tracks whole arrays may report them as circular logic. There is no real
// loop: every element is driven from its left or upper neighbour only.
module systolic_array #(
  parameter int unsigned I    = 16,   // tiles per row
  parameter int unsigned J    = 1,    // PEs per row within a tile
  parameter int unsigned WI   = 8,
  parameter int unsigned WA   = 32,
  parameter int unsigned N    = I * J
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         preload_valid,
  input  logic [$clog2(N)-1:0]         preload_idx,
  input  logic [N-1:0][WI-1:0]         preload_row,
  input  logic                         in_valid,
  input  logic [N-1:0][WI-1:0]         in_row,
  output logic                         out_valid,
  output logic [N-1:0][WA-1:0]         out_row,
  input  logic                         fi_en,
  input  logic [1:0]                   fi_kind,
  input  logic [$clog2(N)-1:0]         fi_row,
  input  logic [$clog2(N)-1:0]         fi_col,
  input  logic [$clog2(WA)-1:0]        fi_bit
);
  localparam int unsigned LAT = 2 * I - 1;

  logic signed [WI-1:0] w    [N][N];
  logic signed [WI-1:0] a_w  [N][N];   // input value seen by PE(r,c)
  logic signed [WI-1:0] a_q  [N][N];   // registered copy (used at tile column boundaries)
  logic        [WA-1:0] ps_w [N][N];   // partial sum out of PE(r,c)
  logic        [WA-1:0] ps_q [N][N];   // registered copy (used at tile row boundaries)
  logic signed [WI-1:0] skew [N][I];   // input skew lines
  logic        [WA-1:0] dsk  [N][I];   // output deskew lines
  logic        [LAT-1:0] vpipe;

  // stationary weights
  always_ff @(posedge clk) begin
    if (preload_valid)
      for (int unsigned c = 0; c < N; c++) w[preload_idx][c] <= preload_row[c];
  end

  // input skew: array row r is delayed by its tile row index r/J
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < N; r++)
        for (int unsigned t = 0; t < I; t++) skew[r][t] <= '0;
    end else begin
      for (int unsigned r = 0; r < N; r++) begin
        skew[r][0] <= in_valid ? in_row[r] : '0;
        for (int unsigned t = 1; t < I; t++) skew[r][t] <= skew[r][t-1];
      end
    end
  end

  // PE grid: combinational inside a tile, registered between tiles
  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_pe
      logic signed [WI-1:0] ain;
      logic        [WA-1:0] pin;
      logic        [WA-1:0] mac;
      if (c == 0) begin : g_ain_edge
        if (r / J == 0) begin : g_noskew
          assign ain = in_valid ? in_row[r] : '0;
        end else begin : g_skew
          assign ain = skew[r][r / J - 1];
        end
      end else if ((c - 1) % J == J - 1) begin : g_ain_reg
        assign ain = a_q[r][c-1];
      end else begin : g_ain_comb
        assign ain = a_w[r][c-1];
      end
      if (r == 0) begin : g_pin_top
        assign pin = '0;
      end else if ((r - 1) % J == J - 1) begin : g_pin_reg
        assign pin = ps_q[r-1][c];
      end else begin : g_pin_comb
        assign pin = ps_w[r-1][c];
      end
      assign mac = pin + WA'($signed(ain) * $signed(w[r][c]));
      always_comb begin
        ps_w[r][c] = mac;
        if (fi_en && 32'(fi_row) == r && 32'(fi_col) == c) begin
          case (fi_kind)
            2'd0:    ps_w[r][c][fi_bit] = ~mac[fi_bit];
            2'd1:    ps_w[r][c][fi_bit] = 1'b0;
            default: ps_w[r][c][fi_bit] = 1'b1;
          endcase
        end
      end
      assign a_w[r][c] = ain;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < N; r++)
        for (int unsigned c = 0; c < N; c++) begin
          a_q[r][c]  <= '0;
          ps_q[r][c] <= '0;
        end
    end else begin
      for (int unsigned r = 0; r < N; r++)
        for (int unsigned c = 0; c < N; c++) begin
          a_q[r][c]  <= a_w[r][c];
          ps_q[r][c] <= ps_w[r][c];
        end
    end
  end

  // output deskew: column tile u waits I-1-u more cycles
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned c = 0; c < N; c++)
        for (int unsigned t = 0; t < I; t++) dsk[c][t] <= '0;
      vpipe <= '0;
    end else begin
      for (int unsigned c = 0; c < N; c++) begin
        dsk[c][0] <= ps_q[N-1][c];
        for (int unsigned t = 1; t < I; t++) dsk[c][t] <= dsk[c][t-1];
      end
      vpipe <= {vpipe[LAT-2:0], in_valid};
    end
  end

  always_comb begin
    for (int unsigned c = 0; c < N; c++) begin
      if (c / J == I - 1) out_row[c] = ps_q[N-1][c];
      else                out_row[c] = dsk[c][I - 2 - c / J];
    end
  end
  assign out_valid = vpipe[LAT-1];
endmodule
