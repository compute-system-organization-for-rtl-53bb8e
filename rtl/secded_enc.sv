// secded_enc: SECDED (72,64) encoder for SRAM writes.
//
// Adds 8 check bits to a 64-bit word with an extended Hamming code (see
// howfsc_pkg::secded_encode for the bit placement).  Purely combinational.
// The source asks for ECC on all memory and names SECDED; the particular code
// is this design's choice.
module secded_enc
  import howfsc_pkg::*;
(
  input  logic [63:0] data_in,
  output logic [71:0] cw_out
);
  always_comb cw_out = secded_encode(data_in);
endmodule
