// sram_chiplet_tb: one chiplet (global chiplet 1, 4 banks, 2 child links) in a
// system of 3 chiplets (12 banks).  The test loads the chiplet's banks through
// the parent link, then runs an ABFT-checked GEMV of a 20 x 6 matrix (rows
// 4..7 and 16..19 live here) while the two child links, modelled by the test,
// accept the forwarded broadcast with random back-pressure and send their own
// result packets.  Checks: every broadcast packet reaches both child links in
// order (writes included); the parent link returns the chiplet's 8 row results
// with the right values and row tags plus every child packet unchanged; a
// write to another chiplet's bank changes nothing here.
module sram_chiplet_tb;
  import howfsc_pkg::*;
  localparam int BANKS = 4, DEG = 2, NPE = 12, CHIP = 1;
  localparam int NE = 6, NR = 20, ROWS = 2, STRIDE = 3;
  localparam int NCHILD_PKT = 7;

  logic clk = 0, rst_n = 0;
  logic up_bc_valid, up_bc_ready, up_ga_valid, up_ga_ready, inj_valid;
  bcast_pkt_t up_bc_pkt, dn_bc_pkt;
  gather_pkt_t up_ga_pkt;
  logic [DEG-1:0] dn_bc_valid, dn_bc_ready, dn_ga_valid, dn_ga_ready;
  gather_pkt_t dn_ga_pkt [DEG];
  logic [BANK_ID_W-1:0] inj_bank;
  int checks = 0, failures = 0;

  sram_chiplet #(.BANKS(BANKS), .DEGREE(DEG), .BANK_WORDS(32)) dut (
    .clk(clk), .rst_n(rst_n), .chip_idx(BANK_ID_W'(CHIP)), .n_pe(BANK_ID_W'(NPE)),
    .up_bc_valid(up_bc_valid), .up_bc_ready(up_bc_ready), .up_bc_pkt(up_bc_pkt),
    .up_ga_valid(up_ga_valid), .up_ga_ready(up_ga_ready), .up_ga_pkt(up_ga_pkt),
    .dn_bc_valid(dn_bc_valid), .dn_bc_ready(dn_bc_ready), .dn_bc_pkt(dn_bc_pkt),
    .dn_ga_valid(dn_ga_valid), .dn_ga_ready(dn_ga_ready), .dn_ga_pkt(dn_ga_pkt),
    .inj_valid(inj_valid), .inj_bank(inj_bank));

  always #5 clk = ~clk;

  task automatic chk(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int A [NR][NE];
  int x [NE];
  bcast_pkt_t sent [$];
  bcast_pkt_t got_dn [DEG][$];
  gather_pkt_t got_up [$];

  // child links: random ready, and each child sends NCHILD_PKT results
  int c_sent [DEG];
  logic [DEG-1:0] cg_taken;
  logic go_children;
  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < DEG; c++) begin
      dn_bc_ready[c] = ($urandom % 3 != 0);
      if (!dn_ga_valid[c] || cg_taken[c]) begin
        dn_ga_valid[c] = go_children && (c_sent[c] < NCHILD_PKT) && ($urandom % 2 == 0);
        dn_ga_pkt[c] = '0;
        dn_ga_pkt[c].idx  = IDX_W'(1000 + 100 * c + c_sent[c]);
        dn_ga_pkt[c].data = 64'(c_sent[c]);
      end
    end
    up_ga_ready = ($urandom % 4 != 0);
  end

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < DEG; c++) begin
      cg_taken[c] = dn_ga_valid[c] && dn_ga_ready[c];
      if (cg_taken[c]) c_sent[c]++;
      if (dn_bc_valid[c] && dn_bc_ready[c]) got_dn[c].push_back(dn_bc_pkt);
    end
    if (up_ga_valid && up_ga_ready) got_up.push_back(up_ga_pkt);
  end

  task automatic send(input bcast_pkt_t p);
    @(negedge clk);
    up_bc_valid = 1;
    up_bc_pkt = p;
    do @(posedge clk); while (!up_bc_ready);
    sent.push_back(p);
    #1 up_bc_valid = 0;
  endtask

  function automatic int elem(input int g, input int s, input int j);
    int t;
    if (s == ROWS) begin
      t = 0;
      for (int q = 0; q < ROWS; q++) t += elem(g, q, j);
      return t;
    end
    return (g + s * NPE < NR) ? A[g + s * NPE][j] : 0;
  endfunction

  initial begin
    bcast_pkt_t p;
    gemv_cmd_t c;
    int n_own, n_child, bad;
    up_bc_valid = 0; up_bc_pkt = '0; up_ga_ready = 0; inj_valid = 0; inj_bank = '0;
    dn_bc_ready = '0; dn_ga_valid = '0; go_children = 0; cg_taken = '0;
    for (int k = 0; k < DEG; k++) begin c_sent[k] = 0; dn_ga_pkt[k] = '0; end
    for (int r = 0; r < NR; r++) for (int j = 0; j < NE; j++) A[r][j] = int'($urandom % 21) - 10;
    for (int j = 0; j < NE; j++) x[j] = int'($urandom % 21) - 10;
    #22 rst_n = 1;

    // load this chiplet's banks (global 4..7)
    for (int g = CHIP * BANKS; g < (CHIP + 1) * BANKS; g++)
      for (int j = 0; j < NE; j++)
        for (int s = 0; s <= ROWS; s++) begin
          p = '0; p.kind = PK_WRITE; p.bank = BANK_ID_W'(g); p.addr = ADDR_W'(j * STRIDE + s);
          p.data = $realtobits(real'(elem(g, s, j)));
          send(p);
        end
    // a write meant for bank 9 (another chiplet) at an address this chiplet uses
    p = '0; p.kind = PK_WRITE; p.bank = 9; p.addr = 0; p.data = $realtobits(1.0e6);
    send(p);

    // GEMV
    c = '0; c.abft_en = 1; c.stride = SLOT_W'(STRIDE); c.rows = SLOT_W'(ROWS);
    c.n_rows = IDX_W'(NR); c.n_in = IDX_W'(NE);
    p = '0; p.kind = PK_GEMV; p.addr = '0; p.data = 64'(c);
    send(p);
    go_children = 1;
    for (int j = 0; j < NE; j++) begin
      p = '0; p.kind = PK_DATA; p.data = $realtobits(real'(x[j]));
      send(p);
    end
    wait (got_up.size() == 2 * BANKS + DEG * NCHILD_PKT);
    repeat (50) @(posedge clk);

    // broadcast forwarded to both children, in order
    for (int k = 0; k < DEG; k++) begin
      bad = 0;
      chk("child link got every broadcast packet", got_dn[k].size() == sent.size());
      for (int i = 0; i < sent.size() && i < got_dn[k].size(); i++) if (got_dn[k][i] != sent[i]) bad++;
      chk("child link packets in order and unchanged", bad == 0);
    end
    // gather
    n_own = 0; n_child = 0; bad = 0;
    chk("no extra gather packets", got_up.size() == 2 * BANKS + DEG * NCHILD_PKT);
    foreach (got_up[i]) begin
      if (got_up[i].idx >= 1000) begin
        int ch, k;
        ch = (int'(got_up[i].idx) - 1000) / 100;
        k  = (int'(got_up[i].idx) - 1000) % 100;
        n_child++;
        if (ch >= DEG || k >= NCHILD_PKT || got_up[i].data != 64'(k)) bad++;
      end else begin
        real rv;
        int r;
        r = int'(got_up[i].idx);
        rv = 0.0;
        for (int j = 0; j < NE; j++) rv = rv + real'(A[r][j]) * real'(x[j]);
        n_own++;
        if (!((r >= 4 && r < 8) || (r >= 16 && r < 20))) bad++;
        else if ($bitstoreal(got_up[i].data) != rv) bad++;
        if (got_up[i].abft_err || got_up[i].ecc_ue || got_up[i].ecc_ce) bad++;
      end
    end
    chk("own rows returned", n_own == 2 * BANKS);
    chk("child results passed up", n_child == DEG * NCHILD_PKT);
    chk("values, tags and flags", bad == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
