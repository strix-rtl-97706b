// tmr_vote: bitwise two-out-of-three majority voter with a disagreement flag.
// Combinational. `mismatch` is set when any copy differs from the others, i.e. one copy
// was outvoted (the output is still correct for any single faulty copy).
module tmr_vote #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y,
  output logic         mismatch
);
  assign y        = (a & b) | (a & c) | (b & c);
  assign mismatch = (a != b) || (a != c);
endmodule
