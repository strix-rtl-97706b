// reservation_station: ECC-protected instruction queue with precompute generation.
//
// Commands from the host are held in a DEPTH-entry queue until the controller takes them.
// The queue entries are among the paper's critical registers (small state, large fan-out),
// so every entry is stored with the SEC-DED code of secded_enc (CMD_W data bits plus
// ceil(log2(CMD_W+1))+1 check bits) and the head entry is decoded through secded_dec on
// issue: a single flipped bit is corrected on the fly, a multi-bit error is reported
// (ecc_uncorr) and the corrupt command is dropped rather than executed.
// For every compute command the station first issues a precompute sub-instruction (same
// fields, opcode OP_PRECOMP) and then the compute itself, so the verifier/corrector and
// checksum adder are scheduled ahead of the array, as in the paper's pipeline.
//
// Interface: valid/ready on both sides; out_cmd is combinational from the head entry.
// fi_en/fi_idx/fi_mask flip stored bits of one entry (fault-injection hook).
// Issue is in order: Gemmini's station tracks dependencies between separate load, execute
// and store queues; this design keeps one in-order queue (its own choice), which preserves
// the same ordering rules trivially.
module reservation_station #(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned DW    = strix_pkg::CMD_W,
  parameter int unsigned P     = $clog2(DW + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  strix_pkg::cmd_t        in_cmd,
  output logic                   out_valid,
  input  logic                   out_ready,
  output strix_pkg::cmd_t        out_cmd,
  output logic                   ecc_corrected,
  output logic                   ecc_uncorr,
  input  logic                   fi_en,
  input  logic [$clog2(DEPTH)-1:0] fi_idx,
  input  logic [DW+P:0]          fi_mask
);
  import strix_pkg::*;
  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW+P:0] q [DEPTH];
  logic [AW:0]   wp, rp;
  logic          pre_done;   // precompute of the head compute already issued

  logic [P-1:0]  enc_p;
  logic          enc_g;
  logic [DW-1:0] head_data;
  logic          d_corr, d_cf, d_unc;
  logic          empty, full;
  cmd_t          head;

  secded_enc #(.ALPHA(DW), .P(P)) u_enc (.data(in_cmd), .partial(enc_p), .global_p(enc_g));
  secded_dec #(.ALPHA(DW), .P(P)) u_dec (
    .data(q[rp[AW-1:0]][DW-1:0]), .partial(q[rp[AW-1:0]][DW+P-1:DW]),
    .global_p(q[rp[AW-1:0]][DW+P]),
    .data_out(head_data), .syndrome(), .corrected(d_corr), .check_fault(d_cf),
    .uncorrectable(d_unc));

  assign empty    = (wp == rp);
  assign full     = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign in_ready = !full;
  assign head     = cmd_t'(head_data);

  always_comb begin
    out_cmd   = head;
    out_valid = !empty && !d_unc;
    if (head.op == OP_COMPUTE && !pre_done) out_cmd.op = OP_PRECOMP;
  end

  assign ecc_corrected = !empty && (d_corr || d_cf) && out_ready;
  assign ecc_uncorr    = !empty && d_unc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      pre_done <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        q[wp[AW-1:0]] <= {enc_g, enc_p, in_cmd};
        wp <= wp + 1'b1;
      end
      if (fi_en) q[fi_idx] <= q[fi_idx] ^ fi_mask;
      if (!empty && d_unc) begin
        rp       <= rp + 1'b1;       // drop the corrupt command
        pre_done <= 1'b0;
      end else if (out_valid && out_ready) begin
        if (head.op == OP_COMPUTE && !pre_done) begin
          pre_done <= 1'b1;
        end else begin
          rp       <= rp + 1'b1;
          pre_done <= 1'b0;
        end
      end
    end
  end
endmodule
