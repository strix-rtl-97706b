// accumulator: banked row memory of the NPU's local memory, the acc_t (32-bit) accumulator of the paper's INT8 default configuration: 64 KB = 1024 rows of 16 x 32 bits.
//
// One row holds N elements, matching one row of PEs. The rows are split over BANKS banks by
// the high address bits (Gemmini-style banking; the paper's overview draws the banks but
// gives no interleaving, so contiguous bank ranges are this design's choice). One write
// port and one read port; reads are synchronous with one cycle of latency.
//
// The memory itself carries no protection: its checksums live in the guardpad. The fi_*
// inputs are the fault-injection hook: when fi_en is set and a read hits fi_addr, fi_mask
// is XORed into the data read out (a read-path bit flip).
module accumulator #(
  parameter int unsigned N     = 16,
  parameter int unsigned W     = 32,
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned BANKS = 2,
  parameter int unsigned AW    = $clog2(ROWS)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic [N-1:0][W-1:0]  wdata,
  input  logic                 re,
  input  logic [AW-1:0]        raddr,
  output logic [N-1:0][W-1:0]  rdata,
  input  logic                 fi_en,
  input  logic [AW-1:0]        fi_addr,
  input  logic [N-1:0][W-1:0]  fi_mask
);
  localparam int unsigned BROWS = ROWS / BANKS;
  localparam int unsigned BW    = (BANKS > 1) ? $clog2(BANKS) : 1;
  localparam int unsigned RW    = $clog2(BROWS);

  logic [BANKS-1:0][N-1:0][W-1:0] bank_q;
  logic [BW-1:0]                  rbank_q;
  logic                           hit_q;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [N-1:0][W-1:0] mem [BROWS];
    always_ff @(posedge clk) begin
      if (we && (32'(waddr) / BROWS == b)) mem[RW'(32'(waddr) % BROWS)] <= wdata;
      if (re && (32'(raddr) / BROWS == b)) bank_q[b] <= mem[RW'(32'(raddr) % BROWS)];
    end
  end

  always_ff @(posedge clk) begin
    if (re) begin
      rbank_q <= BW'(32'(raddr) / BROWS);
      hit_q   <= fi_en && (raddr == fi_addr);
    end
  end

  assign rdata = bank_q[rbank_q] ^ (hit_q ? fi_mask : '0);
endmodule
