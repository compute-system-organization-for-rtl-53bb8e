// howfsc_sram_top: SRAM-only distributed-memory EFC accelerator.
//
// The gain matrix M and the Jacobian transpose J^T of the coronagraph are
// spread row-wise over the SRAM banks of N_CHIP identical chiplets.  Every bank
// sits beside one FP64 MAC, so memory bandwidth and compute grow together and
// no matrix word ever leaves its bank.  The chiplets form a DEGREE-ary tree of
// TIERS tiers below the leader (DEGREE + DEGREE^2 + ... chiplets, 62 for the
// default 2-degree 5-tier tree); inside a chiplet a binary tree network
// reaches its BANKS banks.  The leader (efc_sequencer, standing in for the
// host CPU's side of the link) broadcasts a vector down the tree, every bank
// computes the dot products of its rows, and the tagged results are gathered
// back up.  EFC is two such passes: J^T E, then -M (J^T E).
//
// Row assignment: global bank g = chip*BANKS + i holds global rows g + s*N_PE,
// s = 0..rows-1, N_PE = N_CHIP*BANKS.  Tree wiring: tier-1 chiplets 0..DEGREE-1
// hang off the leader's root node; chiplet c feeds chiplets DEGREE*(c+1)+k.
//
// Default sizes: 62 chiplets x 135 banks = 8370 MACs.  A bank holds
// rows = ceil(25736 / 8370) = 4 rows of J^T (513160 long) and 4 rows of M
// (25736 long), plus one ABFT checksum row each: 5 * (513160 + 25736) =
// 2694480 words of 72 bits.  These cannot be simulated at full size; the
// testbenches use a small tree with short vectors.
// The host-side ports (start, config, vector in, result out, matrix load,
// status) are where the radiation-hardened host CPU connects; inj_* and
// seu_inject are fault-injection inputs for verification, tie them to zero.
// From the source: chiplets in a 2-degree 5-tier tree, 135 MACs per chiplet,
// SRAM banks with co-located MACs, broadcast/gather, two GEMVs for EFC, ECC,
// ABFT and TMR.  The source's table lists 56 chiplets while its figure caption
// says 62 in a 2-degree 5-tier tree; the full tree (62) is built here.
// Lint notes: chiplets of the last tier have no children, so their child-link
// outputs (dbv, dbp, dgr in g_chip) are left unread; and rst_n feeds both the
// asynchronous resets and the 'disable iff' of the sequencer's handshake
// assertions, which lint reports as a mixed sync/async use.  Neither is a
// circuit problem.
module howfsc_sram_top
  import howfsc_pkg::*;
#(
  parameter int unsigned DEGREE     = TREE_DEGREE,
  parameter int unsigned TIERS      = TREE_TIERS,
  parameter int unsigned BANKS      = MACS_PER_CHIPLET,
  parameter int unsigned BANK_WORDS = 2694480,
  parameter int unsigned VEC_DEPTH  = N_ACT,
  parameter int unsigned OUT_DEPTH  = N_ACT,
  parameter int unsigned ABFT_TOL   = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  input  logic              mode,
  input  gemv_cmd_t         cmd_a,
  input  logic [ADDR_W-1:0] base_a,
  input  gemv_cmd_t         cmd_b,
  input  logic [ADDR_W-1:0] base_b,
  input  logic [3:0]        max_retries,
  output logic              busy,
  output logic              done,
  output logic              fail,
  output logic [3:0]        retries,
  output logic [15:0]       ecc_ce_cnt,
  output logic              tmr_mismatch,
  // host vector in / result out
  output logic              need_vec,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [63:0]       in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [IDX_W-1:0]  out_idx,
  output logic [63:0]       out_data,
  // matrix load
  input  logic              ld_valid,
  output logic              ld_ready,
  input  bcast_pkt_t        ld_pkt,
  // fault injection (verification only)
  input  logic [2:0][3:0]   seu_inject,
  input  logic              inj_valid,
  input  logic [BANK_ID_W-1:0] inj_bank
);
  function automatic int unsigned tree_size(input int unsigned d, input int unsigned t);
    int unsigned n, p;
    n = 0;
    p = 1;
    for (int unsigned i = 0; i < t; i++) begin
      p = p * d;
      n = n + p;
    end
    return n;
  endfunction

  localparam int unsigned N_CHIP = tree_size(DEGREE, TIERS);
  localparam int unsigned N_PE   = N_CHIP * BANKS;

  // leader <-> root node
  logic        s_bc_valid, s_bc_ready, s_ga_valid, s_ga_ready;
  bcast_pkt_t  s_bc_pkt;
  gather_pkt_t s_ga_pkt;

  efc_sequencer #(.VEC_DEPTH(VEC_DEPTH), .OUT_DEPTH(OUT_DEPTH)) u_seq (
    .clk(clk), .rst_n(rst_n),
    .start(start), .mode(mode), .cmd_a(cmd_a), .base_a(base_a), .cmd_b(cmd_b), .base_b(base_b),
    .max_retries(max_retries), .busy(busy), .done(done), .fail(fail), .retries(retries),
    .ecc_ce_cnt(ecc_ce_cnt), .tmr_mismatch(tmr_mismatch), .seu_inject(seu_inject),
    .need_vec(need_vec), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_idx(out_idx), .out_data(out_data),
    .ld_valid(ld_valid), .ld_ready(ld_ready), .ld_pkt(ld_pkt),
    .bc_valid(s_bc_valid), .bc_ready(s_bc_ready), .bc_pkt(s_bc_pkt),
    .ga_valid(s_ga_valid), .ga_ready(s_ga_ready), .ga_pkt(s_ga_pkt)
  );

  // link into chiplet c (from its parent)
  logic        l_bc_valid [N_CHIP];
  logic        l_bc_ready [N_CHIP];
  bcast_pkt_t  l_bc_pkt   [N_CHIP];
  logic        l_ga_valid [N_CHIP];
  logic        l_ga_ready [N_CHIP];
  gather_pkt_t l_ga_pkt   [N_CHIP];

  // root node: leader -> tier-1 chiplets
  logic [DEGREE-1:0] rt_bv, rt_br, rt_gv, rt_gr;
  bcast_pkt_t        rt_bp;
  gather_pkt_t       rt_gp [DEGREE];

  tree_node #(.N_CHILD(DEGREE)) u_root (
    .clk(clk), .rst_n(rst_n),
    .par_bc_valid(s_bc_valid), .par_bc_ready(s_bc_ready), .par_bc_pkt(s_bc_pkt),
    .par_ga_valid(s_ga_valid), .par_ga_ready(s_ga_ready), .par_ga_pkt(s_ga_pkt),
    .child_bc_valid(rt_bv), .child_bc_ready(rt_br), .child_bc_pkt(rt_bp),
    .child_ga_valid(rt_gv), .child_ga_ready(rt_gr), .child_ga_pkt(rt_gp)
  );

  for (genvar k = 0; k < DEGREE; k++) begin : g_tier1
    assign l_bc_valid[k] = rt_bv[k];
    assign rt_br[k]      = l_bc_ready[k];
    assign l_bc_pkt[k]   = rt_bp;
    assign rt_gv[k]      = l_ga_valid[k];
    assign l_ga_ready[k] = rt_gr[k];
    assign rt_gp[k]      = l_ga_pkt[k];
  end

  for (genvar c = 0; c < N_CHIP; c++) begin : g_chip
    logic [DEGREE-1:0] dbv, dbr, dgv, dgr;
    bcast_pkt_t        dbp;
    gather_pkt_t       dgp [DEGREE];

    sram_chiplet #(.BANKS(BANKS), .DEGREE(DEGREE), .BANK_WORDS(BANK_WORDS),
                   .ABFT_TOL(ABFT_TOL)) u_chip (
      .clk(clk), .rst_n(rst_n),
      .chip_idx(BANK_ID_W'(c)), .n_pe(BANK_ID_W'(N_PE)),
      .up_bc_valid(l_bc_valid[c]), .up_bc_ready(l_bc_ready[c]), .up_bc_pkt(l_bc_pkt[c]),
      .up_ga_valid(l_ga_valid[c]), .up_ga_ready(l_ga_ready[c]), .up_ga_pkt(l_ga_pkt[c]),
      .dn_bc_valid(dbv), .dn_bc_ready(dbr), .dn_bc_pkt(dbp),
      .dn_ga_valid(dgv), .dn_ga_ready(dgr), .dn_ga_pkt(dgp),
      .inj_valid(inj_valid), .inj_bank(inj_bank)
    );

    for (genvar k = 0; k < DEGREE; k++) begin : g_child
      localparam int unsigned CH = DEGREE * (c + 1) + k;
      if (CH < N_CHIP) begin : g_link
        assign l_bc_valid[CH] = dbv[k];
        assign dbr[k]         = l_bc_ready[CH];
        assign l_bc_pkt[CH]   = dbp;
        assign dgv[k]         = l_ga_valid[CH];
        assign l_ga_ready[CH] = dgr[k];
        assign dgp[k]         = l_ga_pkt[CH];
      end else begin : g_open
        assign dbr[k] = 1'b1;
        assign dgv[k] = 1'b0;
        assign dgp[k] = '0;
      end
    end
  end
endmodule
