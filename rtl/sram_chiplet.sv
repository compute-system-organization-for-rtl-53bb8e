// sram_chiplet: one SRAM chiplet of the distributed-memory EFC accelerator.
//
// A chiplet is one node of the off-chip H-tree and also a compute node.  Its
// router (a tree_node with DEGREE+1 children) takes broadcast packets from the
// parent link and forwards them both to the on-chip tree network and to
// DEGREE child chiplets; on the way up it merges results from its own banks
// and from the child chiplets.  Chiplets at the bottom tier leave their child
// links unconnected (tie child_bc_ready high and child_ga_valid low).
// The on-chip tree (chip_tree_net) fans out to BANKS bank_pe instances, each an
// SRAM bank with one FP64 MAC.  Bank i of chiplet c has global number
// c*BANKS + i, which decides which matrix rows it holds.
// The parent link stands for the I/O PHY of the source's figure; the PHY
// itself (a SerDes) is not modelled, the link is a registered parallel bus.
// From the source: one MAC per SRAM bank, 135 MACs per chiplet, a tree network
// on chip, chiplets in a 2-degree H-tree.  Router structure, link format and
// bank numbering are this design's own.
module sram_chiplet
  import howfsc_pkg::*;
#(
  parameter int unsigned BANKS      = 135,
  parameter int unsigned DEGREE     = 2,
  parameter int unsigned BANK_WORDS = 2694480,
  parameter int unsigned ABFT_TOL   = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [BANK_ID_W-1:0] chip_idx,   // position of this chiplet in the tree
  input  logic [BANK_ID_W-1:0] n_pe,       // banks in the whole system
  // parent link
  input  logic                 up_bc_valid,
  output logic                 up_bc_ready,
  input  bcast_pkt_t           up_bc_pkt,
  output logic                 up_ga_valid,
  input  logic                 up_ga_ready,
  output gather_pkt_t          up_ga_pkt,
  // child chiplet links
  output logic [DEGREE-1:0]    dn_bc_valid,
  input  logic [DEGREE-1:0]    dn_bc_ready,
  output bcast_pkt_t           dn_bc_pkt,
  input  logic [DEGREE-1:0]    dn_ga_valid,
  output logic [DEGREE-1:0]    dn_ga_ready,
  input  gather_pkt_t          dn_ga_pkt [DEGREE],
  // fault injection (test only)
  input  logic                 inj_valid,
  input  logic [BANK_ID_W-1:0] inj_bank
);
  localparam int unsigned NC = DEGREE + 1;

  logic [NC-1:0] r_bv, r_br, r_gv, r_gr;
  bcast_pkt_t    r_bp;
  gather_pkt_t   r_gp [NC];

  tree_node #(.N_CHILD(NC)) u_router (
    .clk(clk), .rst_n(rst_n),
    .par_bc_valid(up_bc_valid), .par_bc_ready(up_bc_ready), .par_bc_pkt(up_bc_pkt),
    .par_ga_valid(up_ga_valid), .par_ga_ready(up_ga_ready), .par_ga_pkt(up_ga_pkt),
    .child_bc_valid(r_bv), .child_bc_ready(r_br), .child_bc_pkt(r_bp),
    .child_ga_valid(r_gv), .child_ga_ready(r_gr), .child_ga_pkt(r_gp)
  );

  // router child 0: on-chip tree; children 1..DEGREE: child chiplets
  assign dn_bc_valid = r_bv[NC-1:1];
  assign dn_bc_pkt   = r_bp;
  assign r_br[NC-1:1] = dn_bc_ready;
  assign r_gv[NC-1:1] = dn_ga_valid;
  assign dn_ga_ready = r_gr[NC-1:1];
  for (genvar c = 0; c < DEGREE; c++) begin : g_dn
    assign r_gp[c+1] = dn_ga_pkt[c];
  end

  logic [BANKS-1:0] l_bv, l_br, l_gv, l_gr;
  bcast_pkt_t       l_bp [BANKS];
  gather_pkt_t      l_gp [BANKS];

  chip_tree_net #(.N_LEAVES(BANKS)) u_net (
    .clk(clk), .rst_n(rst_n),
    .root_bc_valid(r_bv[0]), .root_bc_ready(r_br[0]), .root_bc_pkt(r_bp),
    .root_ga_valid(r_gv[0]), .root_ga_ready(r_gr[0]), .root_ga_pkt(r_gp[0]),
    .leaf_bc_valid(l_bv), .leaf_bc_ready(l_br), .leaf_bc_pkt(l_bp),
    .leaf_ga_valid(l_gv), .leaf_ga_ready(l_gr), .leaf_ga_pkt(l_gp)
  );

  logic [BANK_ID_W-1:0] id_base;
  assign id_base = BANK_ID_W'(chip_idx * BANK_ID_W'(BANKS));

  for (genvar i = 0; i < BANKS; i++) begin : g_pe
    bank_pe #(.WORDS(BANK_WORDS), .ABFT_TOL(ABFT_TOL)) u_pe (
      .clk(clk), .rst_n(rst_n),
      .pe_id(id_base + BANK_ID_W'(i)), .n_pe(n_pe),
      .bc_valid(l_bv[i]), .bc_ready(l_br[i]), .bc_pkt(l_bp[i]),
      .ga_valid(l_gv[i]), .ga_ready(l_gr[i]), .ga_pkt(l_gp[i]),
      .inj_valid(inj_valid), .inj_bank(inj_bank)
    );
  end
endmodule
