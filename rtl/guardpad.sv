// guardpad: checksum store of the local memory.
//
// Every checked block of N rows owns two guardpad rows: the N row checksums (one per data
// row) and the N column checksums, each checksum as wide as the element it covers. The
// guardpad therefore has two banks: an elem_t bank for scratchpad blocks (8-bit checksums)
// and an acc_t bank for accumulator blocks (32-bit checksums). Default sizes cover the
// whole local memory of the INT8 default configuration: 1024 scratchpad blocks -> 2048 rows
// of 16 x 8 bits, 64 accumulator blocks -> 128 rows of 16 x 32 bits (40 KB in all).
// Each bank has one write and one read port; reads are synchronous, one cycle latency.
// fi_* of each bank XOR a mask into the data read at fi_addr (fault injection into
// checksums). The two-row-per-block layout is this design's choice; the paper gives the
// guardpad's role, not its organisation.
module guardpad #(
  parameter int unsigned N       = 16,
  parameter int unsigned WE      = 8,
  parameter int unsigned WA      = 32,
  parameter int unsigned E_ROWS  = 2048,
  parameter int unsigned A_ROWS  = 128,
  parameter int unsigned EAW     = $clog2(E_ROWS),
  parameter int unsigned AAW     = $clog2(A_ROWS)
) (
  input  logic                   clk,
  // elem_t bank
  input  logic                   e_we,
  input  logic [EAW-1:0]         e_waddr,
  input  logic [N-1:0][WE-1:0]   e_wdata,
  input  logic                   e_re,
  input  logic [EAW-1:0]         e_raddr,
  output logic [N-1:0][WE-1:0]   e_rdata,
  input  logic                   e_fi_en,
  input  logic [EAW-1:0]         e_fi_addr,
  input  logic [N-1:0][WE-1:0]   e_fi_mask,
  // acc_t bank
  input  logic                   a_we,
  input  logic [AAW-1:0]         a_waddr,
  input  logic [N-1:0][WA-1:0]   a_wdata,
  input  logic                   a_re,
  input  logic [AAW-1:0]         a_raddr,
  output logic [N-1:0][WA-1:0]   a_rdata,
  input  logic                   a_fi_en,
  input  logic [AAW-1:0]         a_fi_addr,
  input  logic [N-1:0][WA-1:0]   a_fi_mask
);
  logic [N-1:0][WE-1:0] e_mem [E_ROWS];
  logic [N-1:0][WA-1:0] a_mem [A_ROWS];
  logic [N-1:0][WE-1:0] e_q;
  logic [N-1:0][WA-1:0] a_q;
  logic                 e_hit, a_hit;

  always_ff @(posedge clk) begin
    if (e_we) e_mem[e_waddr] <= e_wdata;
    if (e_re) begin
      e_q   <= e_mem[e_raddr];
      e_hit <= e_fi_en && (e_raddr == e_fi_addr);
    end
    if (a_we) a_mem[a_waddr] <= a_wdata;
    if (a_re) begin
      a_q   <= a_mem[a_raddr];
      a_hit <= a_fi_en && (a_raddr == a_fi_addr);
    end
  end

  assign e_rdata = e_q ^ (e_hit ? e_fi_mask : '0);
  assign a_rdata = a_q ^ (a_hit ? a_fi_mask : '0);
endmodule
