// tree_node: one node of the broadcast/gather tree.
//
// Downward (broadcast): a packet accepted from the parent is held in one
// register and offered to all N_CHILD children together; it leaves only in a
// cycle where every child is ready, so all subtrees see the same packet
// sequence in lockstep.  in_ready = register empty or leaving.
// Upward (gather): a round-robin arbiter picks one valid child per cycle and
// moves its packet into an output register towards the parent (one packet per
// cycle when the parent is ready).  Each direction adds one cycle of latency
// per tree level.  The source describes broadcast down and gather up an H-tree
// (and an on-chip tree network) without detailing the node; the register
// slices, lockstep rule and round-robin arbitration are this design's choices.
// Note: child_bc_valid depends on child_bc_ready (it is gated by "all ready");
// children must therefore not derive their ready from their valid.
module tree_node
  import howfsc_pkg::*;
#(
  parameter int unsigned N_CHILD = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  // parent side
  input  logic        par_bc_valid,
  output logic        par_bc_ready,
  input  bcast_pkt_t  par_bc_pkt,
  output logic        par_ga_valid,
  input  logic        par_ga_ready,
  output gather_pkt_t par_ga_pkt,
  // child side
  output logic [N_CHILD-1:0] child_bc_valid,
  input  logic [N_CHILD-1:0] child_bc_ready,
  output bcast_pkt_t         child_bc_pkt,
  input  logic [N_CHILD-1:0] child_ga_valid,
  output logic [N_CHILD-1:0] child_ga_ready,
  input  gather_pkt_t        child_ga_pkt [N_CHILD]
);
  localparam int unsigned CW = (N_CHILD > 1) ? $clog2(N_CHILD) : 1;

  // ---------------- broadcast
  logic       bc_full;
  bcast_pkt_t bc_q;
  logic       bc_go;

  assign bc_go          = bc_full && (&child_bc_ready);
  assign par_bc_ready   = !bc_full || (&child_bc_ready);
  assign child_bc_valid = {N_CHILD{bc_go}};
  assign child_bc_pkt   = bc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bc_full <= 1'b0;
      bc_q    <= '0;
    end else if (par_bc_ready) begin
      bc_full <= par_bc_valid;
      if (par_bc_valid) bc_q <= par_bc_pkt;
    end
  end

  // ---------------- gather
  logic          ga_full;
  gather_pkt_t   ga_q;
  logic [CW-1:0] rr;        // highest priority child this cycle
  logic          ga_take;
  logic [CW-1:0] grant;
  logic          any;

  always_comb begin
    any   = 1'b0;
    grant = '0;
    for (int unsigned k = 0; k < N_CHILD; k++) begin
      int unsigned c;
      c = (int'(rr) + k) % N_CHILD;
      if (!any && child_ga_valid[c]) begin
        any   = 1'b1;
        grant = CW'(c);
      end
    end
  end

  assign ga_take = any && (!ga_full || par_ga_ready);

  always_comb begin
    child_ga_ready = '0;
    if (ga_take) child_ga_ready[grant] = 1'b1;
  end

  assign par_ga_valid = ga_full;
  assign par_ga_pkt   = ga_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ga_full <= 1'b0;
      ga_q    <= '0;
      rr      <= '0;
    end else begin
      if (ga_take) begin
        ga_full <= 1'b1;
        ga_q    <= child_ga_pkt[grant];
        rr      <= (int'(grant) == N_CHILD - 1) ? '0 : grant + CW'(1);
      end else if (par_ga_ready) begin
        ga_full <= 1'b0;
      end
    end
  end
endmodule
