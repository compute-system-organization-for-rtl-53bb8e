// secded_dec: SECDED (72,64) decoder for SRAM reads.
//
// Recomputes the Hamming syndrome and overall parity of a stored codeword.
// A single flipped bit (data, check or parity) is corrected and flagged on
// 'corrected'; two flipped bits are flagged on 'uncorrectable' and the data
// is passed on uncorrected.  Purely combinational, so it sits between the SRAM
// read register and the MAC without adding a cycle.  Since every GEMV pass
// reads every stored word, these reads also act as the memory scrub the source
// says is then unnecessary.  The code itself is this design's choice.
module secded_dec
  import howfsc_pkg::*;
(
  input  logic [71:0] cw_in,
  output logic [63:0] data_out,
  output logic        corrected,
  output logic        uncorrectable
);
  secded_res_t r;
  always_comb begin
    r             = secded_decode(cw_in);
    data_out      = r.data;
    corrected     = r.corrected;
    uncorrectable = r.uncorrectable;
  end
endmodule
