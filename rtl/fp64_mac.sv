// fp64_mac: double-precision multiply-accumulate, acc_out = acc_in + a*b.
//
// This is the compute element paired with every SRAM bank.  The source sizes it
// as a binary64 MAC macro running at 500 MHz and producing one product-sum per
// cycle; it does not describe its internals.  This implementation is purely
// combinational (the caller registers acc_out), which gives the one-result-per-
// cycle rate with zero latency and keeps the accumulator loop free of hazards.
// Arithmetic choices of this design (not from the source): the product is
// rounded before the addition (two roundings, not fused), rounding is to
// nearest even, subnormal inputs and results are flushed to signed zero,
// NaN results are the canonical quiet NaN.
module fp64_mac
  import howfsc_pkg::*;
(
  input  logic [63:0] a,       // matrix element read from the bank
  input  logic [63:0] b,       // broadcast vector element
  input  logic [63:0] acc_in,  // partial sum
  output logic [63:0] acc_out  // acc_in + a*b
);
  logic [63:0] prod;

  always_comb begin
    prod    = fp64_mul(a, b);
    acc_out = fp64_add(acc_in, prod);
  end
endmodule
