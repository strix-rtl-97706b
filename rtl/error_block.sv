// error_block: the fault log of the guardlinker.
//
// Every located fault is reported with its source (scratchpad, accumulator, systolic-array
// tile, register) and location (memory row address, or tile index). The block keeps a small
// table of distinct locations with the number of times each was hit ("Id" and "Times" in the
// paper's figure), so that a location that keeps failing points the developer at a
// permanent fault. A report that matches an existing entry increments its count
// (saturating); a new location takes the next free entry; when the table is full the
// report is dropped and `overflow` is set. Entries are read out by index for the
// mvout_error_block instruction (combinational read). One report per cycle.
// Table depth ENTRIES, the 8-bit count and the dropping policy are this design's choices.
module error_block #(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned LW      = 16,
  parameter int unsigned TW      = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         rep_valid,
  input  strix_pkg::err_src_e          rep_src,
  input  logic [LW-1:0]                rep_loc,
  input  logic [$clog2(ENTRIES)-1:0]   rd_idx,
  output logic                         rd_valid,
  output strix_pkg::err_src_e          rd_src,
  output logic [LW-1:0]                rd_loc,
  output logic [TW-1:0]                rd_times,
  output logic [$clog2(ENTRIES+1)-1:0] n_entries,
  output logic                         overflow
);
  import strix_pkg::*;

  typedef struct packed {
    logic            valid;
    err_src_e        src;
    logic [LW-1:0]   loc;
    logic [TW-1:0]   times;
  } entry_t;

  entry_t tab [ENTRIES];

  logic                        hit;
  logic [$clog2(ENTRIES)-1:0]  hit_idx;

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int unsigned i = 0; i < ENTRIES; i++)
      if (!hit && tab[i].valid && tab[i].src == rep_src && tab[i].loc == rep_loc) begin
        hit     = 1'b1;
        hit_idx = ($clog2(ENTRIES))'(i);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ENTRIES; i++) tab[i] <= '0;
      n_entries <= '0;
      overflow  <= 1'b0;
    end else if (rep_valid) begin
      if (hit) begin
        if (tab[hit_idx].times != '1) tab[hit_idx].times <= tab[hit_idx].times + 1'b1;
      end else if (32'(n_entries) < ENTRIES) begin
        tab[n_entries[$clog2(ENTRIES)-1:0]] <= '{valid: 1'b1, src: rep_src, loc: rep_loc, times: TW'(1)};
        n_entries <= n_entries + 1'b1;
      end else begin
        overflow <= 1'b1;
      end
    end
  end

  assign rd_valid = tab[rd_idx].valid;
  assign rd_src   = tab[rd_idx].src;
  assign rd_loc   = tab[rd_idx].loc;
  assign rd_times = tab[rd_idx].times;
endmodule
