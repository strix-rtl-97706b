// secded_dec: checker and corrector of the register SEC-DED code (see secded_enc).
//
// The partial parity bits and the global bit are recomputed from the stored data and
// compared with the stored check bits. Decision, as the paper describes it:
//   syndrome != 0 and global mismatch  -> single error at data position = syndrome, flipped back
//   syndrome != 0 and global matches   -> multi-bit error, detected only
//   syndrome == 0 and global mismatch  -> the global check bit itself flipped, data is good
// A syndrome that points beyond ALPHA is reported as uncorrectable. A flip of one partial
// parity bit alone therefore reads as a multi-bit error: with ceil(log2(ALPHA+1))+1 check
// bits the code cannot tell it apart (a property of the paper's bit budget). Combinational.
module secded_dec #(
  parameter int unsigned ALPHA = 15,
  parameter int unsigned P     = $clog2(ALPHA + 1)
) (
  input  logic [ALPHA-1:0] data,
  input  logic [P-1:0]     partial,
  input  logic             global_p,
  output logic [ALPHA-1:0] data_out,     // corrected data
  output logic [P-1:0]     syndrome,
  output logic             corrected,    // a single data error was repaired
  output logic             check_fault,  // only the global check bit was wrong
  output logic             uncorrectable // multi-bit error detected
);
  logic [P-1:0] p_re;
  logic         g_re;

  secded_enc #(.ALPHA(ALPHA), .P(P)) u_enc (.data(data), .partial(p_re), .global_p(g_re));

  always_comb begin
    logic gm;
    syndrome      = p_re ^ partial;
    gm            = g_re ^ global_p;
    data_out      = data;
    corrected     = 1'b0;
    check_fault   = 1'b0;
    uncorrectable = 1'b0;
    if (syndrome != '0) begin
      if (gm && (32'(syndrome) <= ALPHA)) begin
        data_out[32'(syndrome) - 1] = ~data[32'(syndrome) - 1];
        corrected = 1'b1;
      end else begin
        uncorrectable = 1'b1;
      end
    end else if (gm) begin
      check_fault = 1'b1;
    end
  end
endmodule
