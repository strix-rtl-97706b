// ecc_reg: a register protected by the SEC-DED code of secded_enc/secded_dec.
//
// Used for the issue/scheduling registers and for the constants software writes into the
// NPU. On a write the data and its ceil(log2(ALPHA+1))+1 check bits are stored together.
// The read port is combinational: the stored word goes through secded_dec every cycle, so
// q always shows the corrected value and the flags show the state of the stored word.
// When a single error is found the corrected word is written back on the next clock edge
// (scrubbing, a choice of this design; the paper only requires detection and correction).
// fi_flip XORs a mask into the stored codeword for one cycle: the fault-injection hook.
// Reset value: data 0 with its matching check bits.
module ecc_reg #(
  parameter int unsigned ALPHA = 15,
  parameter int unsigned P     = $clog2(ALPHA + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic [ALPHA-1:0]     d,
  input  logic [ALPHA+P:0]     fi_flip,       // {global, partial, data} flip mask
  output logic [ALPHA-1:0]     q,
  output logic                 corrected,
  output logic                 check_fault,
  output logic                 uncorrectable
);
  logic [ALPHA-1:0] st_data;
  logic [P-1:0]     st_part;
  logic             st_glob;
  logic [P-1:0]     w_part;
  logic             w_glob;

  secded_enc #(.ALPHA(ALPHA), .P(P)) u_enc (.data(d), .partial(w_part), .global_p(w_glob));
  secded_dec #(.ALPHA(ALPHA), .P(P)) u_dec (
    .data(st_data), .partial(st_part), .global_p(st_glob),
    .data_out(q), .syndrome(), .corrected(corrected),
    .check_fault(check_fault), .uncorrectable(uncorrectable));

  logic [P-1:0] z_part;
  logic         z_glob;
  secded_enc #(.ALPHA(ALPHA), .P(P)) u_enc0 (.data('0), .partial(z_part), .global_p(z_glob));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_data <= '0;
      st_part <= z_part;
      st_glob <= z_glob;
    end else if (we) begin
      {st_glob, st_part, st_data} <= {w_glob, w_part, d} ^ fi_flip;
    end else if (corrected || check_fault) begin
      // scrub: store the corrected word with fresh check bits
      {st_glob, st_part, st_data} <= {st_glob ^ check_fault, st_part, q} ^ fi_flip;
    end else begin
      {st_glob, st_part, st_data} <= {st_glob, st_part, st_data} ^ fi_flip;
    end
  end
endmodule
