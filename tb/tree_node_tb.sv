// tree_node_tb: drives a 3-child tree_node with random valid/ready on every
// port.  Broadcast: every child must receive the parent's packet sequence
// exactly once and in order.  Gather: every child packet must reach the
// parent exactly once, each child's packets in order.  Also checks that a
// packet held by the gather output register stays stable while stalled and
// that the round-robin arbiter interleaves children when all are valid.
module tree_node_tb;
  import howfsc_pkg::*;
  localparam int NC = 3;
  localparam int NB = 300;   // broadcast packets
  localparam int NG = 200;   // gather packets per child

  logic clk = 0, rst_n = 0;
  logic pbv, pbr, pgv, pgr;
  bcast_pkt_t pbp;
  gather_pkt_t pgp;
  logic [NC-1:0] cbv, cbr, cgv, cgr;
  bcast_pkt_t cbp;
  gather_pkt_t cgp [NC];
  int checks = 0, failures = 0;

  tree_node #(.N_CHILD(NC)) dut (
    .clk, .rst_n,
    .par_bc_valid(pbv), .par_bc_ready(pbr), .par_bc_pkt(pbp),
    .par_ga_valid(pgv), .par_ga_ready(pgr), .par_ga_pkt(pgp),
    .child_bc_valid(cbv), .child_bc_ready(cbr), .child_bc_pkt(cbp),
    .child_ga_valid(cgv), .child_ga_ready(cgr), .child_ga_pkt(cgp)
  );

  always #5 clk = ~clk;

  task automatic chk(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  logic pb_taken;
  logic [NC-1:0] cg_taken;
  int sent_b, rcv_b [NC], sent_g [NC], rcv_g [NC], got_total, interleave;
  int last_child;
  gather_pkt_t prev_pgp;
  logic prev_stall;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drivers change on the falling edge, monitors sample on the rising edge
  always @(negedge clk) if (rst_n) begin
    if (!pbv || pb_taken) begin   // hold a presented packet until taken
      pbv = (sent_b < NB) && ($urandom % 4 != 0);
      pbp = '0;
      pbp.kind = PK_DATA;
      pbp.data = 64'(sent_b);
    end
    cbr = NC'($urandom);
    if ($urandom % 8 == 0) cbr = '1;
    pgr = ($urandom % 3 != 0);
    for (int c = 0; c < NC; c++) begin
      if (!cgv[c] || cg_taken[c]) begin
        cgv[c] = (sent_g[c] < NG) && ($urandom % 3 != 0);
        cgp[c] = '0;
        cgp[c].idx = IDX_W'(c * 1000 + sent_g[c]);
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    pb_taken = pbv && pbr;
    if (pb_taken) sent_b++;
    for (int c = 0; c < NC; c++) begin
      if (cbv[c] && cbr[c]) begin
        chk("broadcast order", cbp.data == 64'(rcv_b[c]));
        rcv_b[c]++;
      end
      cg_taken[c] = cgv[c] && cgr[c];
      if (cg_taken[c]) sent_g[c]++;
    end
    if (prev_stall) chk("gather output stable while stalled", pgv && pgp == prev_pgp);
    prev_stall = pgv && !pgr;
    prev_pgp   = pgp;
    if (pgv && pgr) begin
      int c, k;
      c = int'(pgp.idx) / 1000;
      k = int'(pgp.idx) % 1000;
      chk("gather child id", c < NC);
      if (c < NC) begin
        chk("gather order", k == rcv_g[c]);
        rcv_g[c]++;
      end
      if (c != last_child) interleave++;
      last_child = c;
      got_total++;
    end
  end

  initial begin
    pbv = 0; pbp = '0; cbr = '0; pgr = 0; cgv = '0;
    for (int c = 0; c < NC; c++) cgp[c] = '0;
    sent_b = 0; pb_taken = 0; cg_taken = '0; got_total = 0; interleave = 0; last_child = 0; prev_stall = 0;
    for (int c = 0; c < NC; c++) begin rcv_b[c] = 0; sent_g[c] = 0; rcv_g[c] = 0; end
    #22 rst_n = 1;
    wait (got_total == NC * NG && sent_b == NB);
    repeat (10) @(posedge clk);
    for (int c = 0; c < NC; c++) begin
      chk("all broadcast packets delivered", rcv_b[c] == NB);
      chk("all gather packets delivered", rcv_g[c] == NG);
    end
    chk("arbiter interleaves children", interleave > NG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
