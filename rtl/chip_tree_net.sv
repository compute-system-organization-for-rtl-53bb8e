// chip_tree_net: on-chip binary tree network of one SRAM chiplet.
//
// Connects the chiplet's I/O side (one broadcast input, one gather output) to
// N_LEAVES banks.  The tree is a heap of 2-child tree_node instances: node k
// (1 <= k < P) has children 2k and 2k+1, and heap positions P..2P-1 are the
// leaves, where P is N_LEAVES rounded up to a power of two.  Leaves beyond
// N_LEAVES are tied off (always ready, never valid) and nodes with no real
// leaf below them are left out.  Every level adds one
// register stage in each direction, so a packet reaches the banks log2(P)
// cycles after it enters and a result needs log2(P) cycles to leave.  The
// source draws this network as a binary tree from the I/O PHY to the banks;
// the heap layout and padding are this design's own.
module chip_tree_net
  import howfsc_pkg::*;
#(
  parameter int unsigned N_LEAVES = 135
) (
  input  logic        clk,
  input  logic        rst_n,
  // root side
  input  logic        root_bc_valid,
  output logic        root_bc_ready,
  input  bcast_pkt_t  root_bc_pkt,
  output logic        root_ga_valid,
  input  logic        root_ga_ready,
  output gather_pkt_t root_ga_pkt,
  // leaf side
  output logic [N_LEAVES-1:0] leaf_bc_valid,
  input  logic [N_LEAVES-1:0] leaf_bc_ready,
  output bcast_pkt_t          leaf_bc_pkt [N_LEAVES],
  input  logic [N_LEAVES-1:0] leaf_ga_valid,
  output logic [N_LEAVES-1:0] leaf_ga_ready,
  input  gather_pkt_t         leaf_ga_pkt [N_LEAVES]
);
  localparam int unsigned LV = (N_LEAVES > 1) ? $clog2(N_LEAVES) : 0;
  localparam int unsigned P  = 1 << LV;

  // leftmost leaf below heap position k; subtrees with no real leaf are empty
  function automatic int unsigned first_leaf(input int unsigned k);
    int unsigned x;
    x = k;
    while (x < P) x = x * 2;
    return x - P;
  endfunction

  // link k carries traffic between heap position k and its parent
  logic        bc_valid [1:2*P-1];
  logic        bc_ready [1:2*P-1];
  bcast_pkt_t  bc_pkt   [1:2*P-1];
  logic        ga_valid [1:2*P-1];
  logic        ga_ready [1:2*P-1];
  gather_pkt_t ga_pkt   [1:2*P-1];

  assign bc_valid[1]   = root_bc_valid;
  assign root_bc_ready = bc_ready[1];
  assign bc_pkt[1]     = root_bc_pkt;
  assign root_ga_valid = ga_valid[1];
  assign ga_ready[1]   = root_ga_ready;
  assign root_ga_pkt   = ga_pkt[1];

  for (genvar k = 1; k < P; k++) begin : g_node
    if (first_leaf(k) < N_LEAVES) begin : g_used
      logic [1:0]  cbv, cbr, cgv, cgr;
      bcast_pkt_t  cbp;
      gather_pkt_t cgp [2];

      tree_node #(.N_CHILD(2)) u_node (
        .clk(clk), .rst_n(rst_n),
        .par_bc_valid(bc_valid[k]), .par_bc_ready(bc_ready[k]), .par_bc_pkt(bc_pkt[k]),
        .par_ga_valid(ga_valid[k]), .par_ga_ready(ga_ready[k]), .par_ga_pkt(ga_pkt[k]),
        .child_bc_valid(cbv), .child_bc_ready(cbr), .child_bc_pkt(cbp),
        .child_ga_valid(cgv), .child_ga_ready(cgr), .child_ga_pkt(cgp)
      );
      for (genvar c = 0; c < 2; c++) begin : g_c
        assign bc_valid[2*k+c] = cbv[c];
        assign cbr[c]          = bc_ready[2*k+c];
        assign bc_pkt[2*k+c]   = cbp;
        assign cgv[c]          = ga_valid[2*k+c];
        assign ga_ready[2*k+c] = cgr[c];
        assign cgp[c]          = ga_pkt[2*k+c];
      end
    end else begin : g_empty
      // no bank below: the link reads as an idle, always-ready child
      assign bc_ready[k] = 1'b1;
      assign ga_valid[k] = 1'b0;
      assign ga_pkt[k]   = '0;
      for (genvar c = 0; c < 2; c++) begin : g_c
        assign bc_valid[2*k+c] = 1'b0;
        assign bc_pkt[2*k+c]   = '0;
        assign ga_ready[2*k+c] = 1'b0;
      end
    end
  end

  for (genvar i = 0; i < P; i++) begin : g_leaf
    if (i < N_LEAVES) begin : g_used
      assign leaf_bc_valid[i] = bc_valid[P+i];
      assign bc_ready[P+i]    = leaf_bc_ready[i];
      assign leaf_bc_pkt[i]   = bc_pkt[P+i];
      assign ga_valid[P+i]    = leaf_ga_valid[i];
      assign leaf_ga_ready[i] = ga_ready[P+i];
      assign ga_pkt[P+i]      = leaf_ga_pkt[i];
    end else begin : g_pad
      assign bc_ready[P+i] = 1'b1;
      assign ga_valid[P+i] = 1'b0;
      assign ga_pkt[P+i]   = '0;
    end
  end
endmodule
