// chip_tree_net_tb: a 5-leaf on-chip tree (padded to 8) with random leaf
// readiness.  Every leaf must receive the root's broadcast sequence exactly
// once and in order; every packet a leaf offers must reach the root exactly
// once, in per-leaf order.  Also measures the broadcast latency with all leaves
// ready: a packet must appear at the leaves log2(8) = 3 cycles after it is
// accepted at the root (one register per level).
module chip_tree_net_tb;
  import howfsc_pkg::*;
  localparam int NL = 5;
  localparam int NB = 200;
  localparam int NG = 100;

  logic clk = 0, rst_n = 0;
  logic rbv, rbr, rgv, rgr;
  bcast_pkt_t rbp;
  gather_pkt_t rgp;
  logic [NL-1:0] lbv, lbr, lgv, lgr;
  bcast_pkt_t lbp [NL];
  gather_pkt_t lgp [NL];
  int checks = 0, failures = 0;

  chip_tree_net #(.N_LEAVES(NL)) dut (
    .clk, .rst_n,
    .root_bc_valid(rbv), .root_bc_ready(rbr), .root_bc_pkt(rbp),
    .root_ga_valid(rgv), .root_ga_ready(rgr), .root_ga_pkt(rgp),
    .leaf_bc_valid(lbv), .leaf_bc_ready(lbr), .leaf_bc_pkt(lbp),
    .leaf_ga_valid(lgv), .leaf_ga_ready(lgr), .leaf_ga_pkt(lgp)
  );

  always #5 clk = ~clk;

  task automatic chk(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  logic rb_taken;
  logic [NL-1:0] lg_taken;
  int sent_b, rcv_b [NL], sent_g [NL], rcv_g [NL], got_total;
  bit random_mode;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && random_mode) begin
    if (!rbv || rb_taken) begin
      rbv = (sent_b < NB) && ($urandom % 3 != 0);
      rbp = '0;
      rbp.kind = PK_DATA;
      rbp.data = 64'(sent_b);
    end
    lbr = NL'($urandom) | NL'($urandom);
    rgr = ($urandom % 4 != 0);
    for (int c = 0; c < NL; c++) begin
      if (!lgv[c] || lg_taken[c]) begin
        lgv[c] = (sent_g[c] < NG) && ($urandom % 2 != 0);
        lgp[c] = '0;
        lgp[c].idx = IDX_W'(c * 1000 + sent_g[c]);
      end
    end
  end

  always @(posedge clk) if (rst_n && random_mode) begin
    rb_taken = rbv && rbr;
    if (rb_taken) sent_b++;
    for (int c = 0; c < NL; c++) begin
      if (lbv[c] && lbr[c]) begin
        chk("broadcast order", lbp[c].data == 64'(rcv_b[c]));
        rcv_b[c]++;
      end
      lg_taken[c] = lgv[c] && lgr[c];
      if (lg_taken[c]) sent_g[c]++;
    end
    if (rgv && rgr) begin
      int c, k;
      c = int'(rgp.idx) / 1000;
      k = int'(rgp.idx) % 1000;
      chk("gather leaf id", c < NL);
      if (c < NL) begin
        chk("gather order", k == rcv_g[c]);
        rcv_g[c]++;
      end
      got_total++;
    end
  end

  initial begin
    int lat;
    rbv = 0; rbp = '0; lbr = '1; rgr = 1; lgv = '0;
    for (int c = 0; c < NL; c++) lgp[c] = '0;
    sent_b = 0; rb_taken = 0; lg_taken = '0; got_total = 0; random_mode = 0;
    for (int c = 0; c < NL; c++) begin rcv_b[c] = 0; sent_g[c] = 0; rcv_g[c] = 0; end
    #22 rst_n = 1;
    // latency probe
    @(negedge clk);
    rbv = 1; rbp = '0; rbp.kind = PK_GEMV; rbp.data = 64'hABCD;
    @(posedge clk); #1;
    chk("root accepts", 1'b1);
    @(negedge clk); rbv = 0;
    lat = 1;
    while (!lbv[0] && lat < 20) begin @(posedge clk); #1; lat++; end
    chk("broadcast latency is 3 cycles", lat == 3);
    chk("all leaves see the probe together", lbv == '1 && lbp[NL-1].data == 64'hABCD);
    @(posedge clk);
    @(negedge clk);
    random_mode = 1;
    wait (got_total == NL * NG && sent_b == NB);
    repeat (20) @(posedge clk);
    for (int c = 0; c < NL; c++) begin
      chk("all broadcast packets delivered", rcv_b[c] == NB);
      chk("all gather packets delivered", rcv_g[c] == NG);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
