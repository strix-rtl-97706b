// secded_enc: check-bit generator of the register SEC-DED code.
//
// Data bit p (1-based position p, data[p-1]) belongs to partial parity group i when bit i
// of the binary index p is 1; each partial parity bit is the XOR of its group, and one global
// parity bit is the XOR of all data bits. For ALPHA data bits this costs
// ceil(log2(ALPHA+1)) + 1 check bits, the cost the paper states. Purely combinational.
//
// The grouping by binary index and the bit count follow the paper's register ECC figure
// (its 15-bit example, 4 partial bits + 1 global bit, is this module with ALPHA = 15). The
// global parity covers the data bits: the figure's printed global bit (1 for data with seven
// ones and all-zero partial bits) fits that reading, not a parity over the partial bits alone.
module secded_enc #(
  parameter int unsigned ALPHA = 15,
  parameter int unsigned P     = $clog2(ALPHA + 1)
) (
  input  logic [ALPHA-1:0] data,
  output logic [P-1:0]     partial,
  output logic             global_p
);
  always_comb begin
    partial = '0;
    for (int unsigned p = 1; p <= ALPHA; p++) begin
      for (int unsigned i = 0; i < P; i++) begin
        if (((p >> i) & 1) == 1) partial[i] = partial[i] ^ data[p-1];
      end
    end
    global_p = ^data;
  end
endmodule
