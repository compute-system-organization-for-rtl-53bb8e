// howfsc_sram_top_tb: end-to-end test of the accelerator on a reduced tree:
// degree 2, 2 tiers (6 chiplets), 3 banks per chiplet, 18 banks in all.  The
// problem is a 30 x 12 "J^T" and a 30 x 30 "M" (2 rows per bank, plus the
// ABFT checksum row, stride 3).  Matrix and field values are small integers
// so every result is exact and the reference du = -M (J^T e) is computed
// here directly.  The test loads both matrices through the host load port,
// then runs:
//   EFC (two passes), single-GEMV mode, EFC with a single-bit error stored in
//   a bank (corrected), EFC with a transient MAC fault injected in one bank
//   (ABFT detects, pass recomputed), EFC with a stored double-bit error
//   (uncorrectable, retries exhausted, fail), EFC with an upset of one TMR
//   copy of the sequencer state.
// It counts how often each mechanism happened (broadcast back-pressure,
// simultaneous gather traffic at the root, ECC correction, ECC detection,
// ABFT recomputation, retry exhaustion, TMR masking, both modes) and counts a
// failure for any that never happened.
module howfsc_sram_top_tb;
  import howfsc_pkg::*;
  localparam int DEG = 2, TIERS = 2, BANKS = 3;
  localparam int NCHIP = DEG + DEG * DEG;
  localparam int NPE = NCHIP * BANKS;           // 18
  localparam int NE = 12, NA = 30;
  localparam int ROWS = (NA + NPE - 1) / NPE;    // 2
  localparam int STRIDE = ROWS + 1;
  localparam int BASE_A = 0, BASE_B = NE * STRIDE;
  localparam int WORDS = BASE_B + NA * STRIDE;   // 126

  logic clk = 0, rst_n = 0;
  logic start, mode, busy, done, fail, tmr_mismatch, need_vec;
  gemv_cmd_t cmd_a, cmd_b;
  logic [ADDR_W-1:0] base_a, base_b;
  logic [3:0] max_retries, retries;
  logic [15:0] ecc_ce_cnt;
  logic [2:0][3:0] seu_inject;
  logic in_valid, in_ready, out_valid, out_ready, ld_valid, ld_ready, inj_valid;
  logic [63:0] in_data, out_data;
  logic [IDX_W-1:0] out_idx;
  logic [BANK_ID_W-1:0] inj_bank;
  bcast_pkt_t ld_pkt;
  int checks = 0, failures = 0;

  howfsc_sram_top #(.DEGREE(DEG), .TIERS(TIERS), .BANKS(BANKS), .BANK_WORDS(128),
                    .VEC_DEPTH(32), .OUT_DEPTH(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int JT [NA][NE];
  int M  [NA][NA];
  int e  [NE];

  // mechanism counters
  int n_loads, n_efc, n_gemv, n_bc_stall, n_ga_contend, n_ce, n_retry, n_fail, n_tmr;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ host side
  int e_idx;
  logic need_q, in_taken;
  always @(negedge clk) if (rst_n) begin
    if (need_vec && !need_q) e_idx = 0;
    need_q = need_vec;
    if (!in_valid || in_taken) begin
      in_valid = need_vec && (e_idx < NE);
      in_data  = $realtobits(real'(e[(e_idx < NE) ? e_idx : 0]));
    end
    out_ready = ($urandom % 4 != 0);
  end

  real got [NA];
  int n_out;
  always @(posedge clk) if (rst_n) begin
    in_taken = in_valid && in_ready;
    if (in_taken) e_idx++;
    if (in_valid && !in_ready) n_bc_stall++;
    if ($countones(dut.u_root.child_ga_valid) > 1) n_ga_contend++;
    if (tmr_mismatch) n_tmr++;
    if (out_valid && out_ready) begin
      if (out_idx < NA) got[int'(out_idx)] = $bitstoreal(out_data);
      n_out++;
    end
  end

  // ------------------------------------------------------------ helpers
  function automatic int a_elem(input int base, input int g, input int s, input int j);
    int r, t;
    if (s == ROWS) begin
      t = 0;
      for (int q = 0; q < ROWS; q++) t += a_elem(base, g, q, j);
      return t;
    end
    r = g + s * NPE;
    if (r >= NA) return 0;
    return (base == BASE_A) ? JT[r][j] : M[r][j];
  endfunction

  task automatic write_word(input int g, input int addr, input int val, input logic [15:0] flip);
    @(negedge clk);
    ld_valid = 1;
    ld_pkt = '0;
    ld_pkt.kind = PK_WRITE; ld_pkt.bank = BANK_ID_W'(g); ld_pkt.addr = ADDR_W'(addr);
    ld_pkt.data = $realtobits(real'(val)); ld_pkt.flip = flip;
    do @(posedge clk); while (!ld_ready);
    n_loads++;
    #1 ld_valid = 0;
  endtask

  task automatic load_all();
    for (int g = 0; g < NPE; g++) begin
      for (int j = 0; j < NE; j++)
        for (int s = 0; s <= ROWS; s++) write_word(g, BASE_A + j * STRIDE + s, a_elem(BASE_A, g, s, j), 16'h0);
      for (int j = 0; j < NA; j++)
        for (int s = 0; s <= ROWS; s++) write_word(g, BASE_B + j * STRIDE + s, a_elem(BASE_B, g, s, j), 16'h0);
    end
  endtask

  function automatic real ref_jte(input int r);
    real acc;
    acc = 0.0;
    for (int j = 0; j < NE; j++) acc = acc + real'(JT[r][j]) * real'(e[j]);
    return acc;
  endfunction

  function automatic real ref_du(input int r);
    real acc;
    acc = 0.0;
    for (int j = 0; j < NA; j++) acc = acc + real'(M[r][j]) * ref_jte(j);
    return -acc;
  endfunction

  task automatic run(input logic m, input bit inject, input bit upset);
    @(negedge clk);
    mode = m; n_out = 0;
    for (int r = 0; r < NA; r++) got[r] = 1.0e9;
    start = 1;
    @(negedge clk);
    start = 0;
    if (inject) begin
      repeat (20) @(negedge clk);
      inj_valid = 1; inj_bank = BANK_ID_W'(NPE - 2);   // a bank in a tier-2 chiplet
      @(negedge clk);
      inj_valid = 0;
    end
    if (upset) begin
      repeat (5) @(negedge clk);
      seu_inject[2] = 4'b1011;
      @(negedge clk);
      seu_inject = '0;
    end
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic check_du(input string tag);
    int bad = 0;
    chk({tag, ": all outputs"}, n_out == NA);
    for (int r = 0; r < NA; r++) if (got[r] != ref_du(r)) bad++;
    chk({tag, ": du = -M J^T e"}, bad == 0);
  endtask

  initial begin
    start = 0; mode = 0; max_retries = 2; seu_inject = '0;
    in_valid = 0; in_data = '0; out_ready = 0; ld_valid = 0; ld_pkt = '0;
    inj_valid = 0; inj_bank = '0;
    e_idx = 0; need_q = 0; in_taken = 0; n_out = 0;
    n_loads = 0; n_efc = 0; n_gemv = 0; n_bc_stall = 0; n_ga_contend = 0;
    n_ce = 0; n_retry = 0; n_fail = 0; n_tmr = 0;
    for (int r = 0; r < NA; r++) begin
      for (int j = 0; j < NE; j++) JT[r][j] = int'($urandom % 15) - 7;
      for (int j = 0; j < NA; j++) M[r][j]  = int'($urandom % 15) - 7;
    end
    for (int j = 0; j < NE; j++) e[j] = int'($urandom % 15) - 7;
    cmd_a = '0; cmd_a.abft_en = 1; cmd_a.stride = SLOT_W'(STRIDE); cmd_a.rows = SLOT_W'(ROWS);
    cmd_a.n_rows = IDX_W'(NA); cmd_a.n_in = IDX_W'(NE);
    cmd_b = cmd_a; cmd_b.n_in = IDX_W'(NA);
    base_a = ADDR_W'(BASE_A); base_b = ADDR_W'(BASE_B);
    #22 rst_n = 1;

    load_all();
    chk("all words loaded", n_loads == NPE * WORDS);

    // 1. EFC
    run(1'b0, 0, 0);
    check_du("efc");
    chk("efc: clean run", !fail && retries == 0 && ecc_ce_cnt == 0);
    if (!fail && n_out == NA) n_efc++;

    // 2. single GEMV: J^T e
    run(1'b1, 0, 0);
    begin
      int bad = 0;
      chk("gemv: all outputs", n_out == NA);
      for (int r = 0; r < NA; r++) if (got[r] != ref_jte(r)) bad++;
      chk("gemv: J^T e", bad == 0);
      if (bad == 0 && n_out == NA) n_gemv++;
    end

    // 3. single-bit error stored in bank 7: corrected
    write_word(7, BASE_B + 4 * STRIDE + 1, a_elem(BASE_B, 7, 1, 4), 16'h0083);
    run(1'b0, 0, 0);
    check_du("ecc ce");
    chk("ecc ce: reported, no retry", ecc_ce_cnt > 0 && retries == 0 && !fail);
    if (ecc_ce_cnt > 0) n_ce++;
    write_word(7, BASE_B + 4 * STRIDE + 1, a_elem(BASE_B, 7, 1, 4), 16'h0);

    // 4. transient MAC fault: ABFT catches it, pass recomputed
    run(1'b0, 1, 0);
    check_du("abft");
    chk("abft: one recomputation", retries == 1 && !fail);
    if (retries == 1) n_retry++;

    // 5. stored double-bit error: uncorrectable, retries run out
    write_word(11, BASE_A + 3 * STRIDE, a_elem(BASE_A, 11, 0, 3), 16'hC383);
    run(1'b0, 0, 0);
    chk("ecc ue: fail after max retries", fail && retries == max_retries);
    chk("ecc ue: nothing returned", n_out == 0);
    if (fail) n_fail++;
    write_word(11, BASE_A + 3 * STRIDE, a_elem(BASE_A, 11, 0, 3), 16'h0);

    // 6. TMR upset
    n_tmr = 0;
    run(1'b0, 0, 1);
    check_du("tmr");
    chk("tmr: clean run", !fail && retries == 0);

    // mechanisms
    $display("mechanisms: loads=%0d efc=%0d gemv=%0d bcast_stall_cycles=%0d gather_contention_cycles=%0d ecc_corrected=%0d abft_recompute=%0d retry_exhausted=%0d tmr_masked_cycles=%0d",
             n_loads, n_efc, n_gemv, n_bc_stall, n_ga_contend, n_ce, n_retry, n_fail, n_tmr);
    chk("mechanism: EFC run", n_efc > 0);
    chk("mechanism: single GEMV run", n_gemv > 0);
    chk("mechanism: broadcast back-pressure", n_bc_stall > 0);
    chk("mechanism: gather contention", n_ga_contend > 0);
    chk("mechanism: ECC correction", n_ce > 0);
    chk("mechanism: ABFT recomputation", n_retry > 0);
    chk("mechanism: retries exhausted", n_fail > 0);
    chk("mechanism: TMR upset masked", n_tmr > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
