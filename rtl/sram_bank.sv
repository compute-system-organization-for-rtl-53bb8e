// sram_bank: one SRAM bank, single port, synchronous read.
//
// Stores WORDS codewords of W bits.  A write and a read cannot happen in the
// same cycle (single port); 'we' takes priority.  Read data appears on 'rdata'
// on the clock edge after 're' and holds until the next read.  The source puts
// one such bank beside every MAC and sizes SRAM by a 2 nm density figure; here
// it is written as an array so that any memory compiler macro of the same
// shape can replace it.  The default depth holds one bank's share of the
// LUVOIR-A Jacobian-transpose and gain matrices with the checksum rows (see
// the top module for the arithmetic).  Contents are not reset.
module sram_bank #(
  parameter int unsigned WORDS = 2694480,
  parameter int unsigned W     = 72,
  parameter int unsigned AW    = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic          re,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) begin
      mem[addr] <= wdata;
    end else if (re) begin
      rdata <= mem[addr];
    end
  end
endmodule
