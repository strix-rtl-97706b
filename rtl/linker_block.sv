// linker_block: binds local-memory blocks to their guardpad checksums.
//
// The guardlinker's linker block keeps, for every block that was written with checksums,
// the mapping from its scratchpad/accumulator rows to its guardpad rows and the block's data
// type (elem_t or acc_t). In this design blocks are N-row aligned, so the table is direct
// mapped by block number: entry b covers rows b*N .. b*N+N-1 of its memory and owns guardpad
// rows 2b (row checksums) and 2b+1 (column checksums) of the bank of its type. An entry
// becomes valid when the block is written through the checksum path (`link`). A read
// looks up the block: `lk_valid` says whether checksums exist (blocks never written through
// the guarded path are forwarded unchecked), `lk_gaddr` is the guardpad row of the row
// checksums. Lookup is combinational; link takes effect at the clock edge.
// The paper's linker table also holds a transposition flag and arbitrary address ranges;
// both need the strided and transposed mvin forms, which this design does not have.
module linker_block #(
  parameter int unsigned N       = 16,
  parameter int unsigned S_ROWS  = 16384,
  parameter int unsigned A_ROWS  = 1024,
  parameter int unsigned AW      = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            link,
  input  logic            link_acc,    // 0: elem_t (scratchpad), 1: acc_t (accumulator)
  input  logic [AW-1:0]   link_addr,
  input  logic            lk_acc,
  input  logic [AW-1:0]   lk_addr,
  output logic            lk_valid,
  output logic [AW-1:0]   lk_gaddr
);
  localparam int unsigned SB = S_ROWS / N;
  localparam int unsigned AB = A_ROWS / N;

  logic [SB-1:0] s_valid;
  logic [AB-1:0] a_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= '0;
      a_valid <= '0;
    end else if (link) begin
      if (link_acc) a_valid[32'(link_addr) / N % AB] <= 1'b1;
      else          s_valid[32'(link_addr) / N % SB] <= 1'b1;
    end
  end

  always_comb begin
    int unsigned blk;
    blk      = 32'(lk_addr) / N;
    lk_gaddr = AW'(2 * blk);
    if (lk_acc) lk_valid = (blk < AB) && a_valid[blk % AB];
    else        lk_valid = (blk < SB) && s_valid[blk % SB];
  end
endmodule
