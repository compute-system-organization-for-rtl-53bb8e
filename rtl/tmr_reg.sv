// tmr_reg: triple-modular-redundant register with majority voting.
//
// Three copies of a W-bit register load the same next value; the output is the
// bitwise majority of the three.  Because the owner computes its next value
// from the voted output, a copy hit by an upset is overwritten on the next
// clock edge (self-scrubbing).  'mismatch' flags any disagreement between the
// copies for error logging.  'upset' XORs a mask into each copy for one edge to
// emulate a single-event upset; tie it to zero in a real build.  The source
// recommends TMR for controller state machines; the voter form is this
// design's choice.
module tmr_reg #(
  parameter int unsigned W = 4,
  parameter logic [W-1:0] RESET_VAL = '0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [W-1:0]     d,
  input  logic [2:0][W-1:0] upset,
  output logic [W-1:0]     q,
  output logic             mismatch
);
  logic [2:0][W-1:0] r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= {3{RESET_VAL}};
    end else begin
      for (int i = 0; i < 3; i++) r[i] <= d ^ upset[i];
    end
  end

  always_comb begin
    q        = (r[0] & r[1]) | (r[0] & r[2]) | (r[1] & r[2]);
    mismatch = (r[0] != r[1]) || (r[0] != r[2]);
  end
endmodule
