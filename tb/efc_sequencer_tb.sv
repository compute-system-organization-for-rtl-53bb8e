// efc_sequencer_tb: the sequencer against a behavioural model of the chiplet
// tree.  The model takes the broadcast stream, and after a PK_GEMV and n_in
// vector elements it returns the n_rows dot products of the matrix selected by
// the command's base address, in a scrambled order and with random gaps, as
// the real tree would.  Matrices and vectors are small integers, so the
// reference -B(A e) is exact.
// Runs: (1) EFC, checks du = -B(A e) in index order; (2) single-GEMV mode,
// checks A e unnegated; (3) EFC where the model flags an ABFT error on the
// first attempt of pass 2 and of pass 1: both passes are recomputed, the host
// is asked for e again, the result is still right; (4) EFC with a permanent
// error: fail after max_retries recomputations and no output; (5) EFC with an
// upset of one TMR copy of the state register mid-run: result unaffected,
// mismatch reported.  Also: load packets pass through in idle, corrected-ECC
// flags are counted.
module efc_sequencer_tb;
  import howfsc_pkg::*;
  localparam int NE = 9, NA = 6;      // e length, actuators
  localparam int BASE_A = 100, BASE_B = 300;

  logic clk = 0, rst_n = 0;
  logic start, mode, busy, done, fail, tmr_mismatch, need_vec;
  gemv_cmd_t cmd_a, cmd_b;
  logic [ADDR_W-1:0] base_a, base_b;
  logic [3:0] max_retries, retries;
  logic [15:0] ecc_ce_cnt;
  logic [2:0][3:0] seu_inject;
  logic in_valid, in_ready, out_valid, out_ready, ld_valid, ld_ready;
  logic [63:0] in_data, out_data;
  logic [IDX_W-1:0] out_idx;
  bcast_pkt_t ld_pkt, bc_pkt;
  logic bc_valid, bc_ready, ga_valid, ga_ready;
  gather_pkt_t ga_pkt;
  int checks = 0, failures = 0;

  efc_sequencer #(.VEC_DEPTH(16), .OUT_DEPTH(16)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int A [NA][NE];   // J^T-like, NA x NE
  int B [NA][NA];   // gain-like
  int e [NE];

  // ---------------------------------------------------- tree model
  gemv_cmd_t m_cmd;
  int m_base, m_nx, m_pass, flag_mode, flag_left, ce_flags;
  real m_x [32];
  real m_y [32];
  int order [$];
  int m_pending, m_sent;
  logic bc_taken, ga_taken;

  always @(negedge clk) if (rst_n) begin
    bc_ready = ($urandom % 4 != 0);
    if (!ga_valid || ga_taken) begin
      ga_valid = 1'b0;
      if (m_pending > 0 && ($urandom % 3 != 0)) begin
        int r;
        r = order[m_sent];
        ga_valid = 1'b1;
        ga_pkt = '0;
        ga_pkt.idx = IDX_W'(r);
        ga_pkt.data = $realtobits(m_y[r]);
        ga_pkt.abft_err = (flag_left > 0) && (m_sent == 0);
        ga_pkt.ecc_ce = (r == 1);
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    bc_taken = bc_valid && bc_ready;
    ga_taken = ga_valid && ga_ready;
    if (ga_taken) begin
      if (ga_pkt.abft_err && flag_left > 0) flag_left--;
      if (ga_pkt.ecc_ce) ce_flags++;
      m_sent++;
      m_pending--;
    end
    if (bc_taken) begin
      if (bc_pkt.kind == PK_GEMV) begin
        m_cmd = gemv_cmd_t'(bc_pkt.data);
        m_base = int'(bc_pkt.addr);
        m_nx = 0;
      end else if (bc_pkt.kind == PK_DATA) begin
        m_x[m_nx] = $bitstoreal(bc_pkt.data);
        m_nx++;
        if (m_nx == int'(m_cmd.n_in)) begin
          order.delete();
          for (int r = 0; r < int'(m_cmd.n_rows); r++) begin
            real acc;
            acc = 0.0;
            for (int j = 0; j < m_nx; j++)
              acc = acc + real'((m_base == BASE_A) ? A[r][j] : B[r][j]) * m_x[j];
            m_y[r] = acc;
            order.push_back(r);
          end
          order.shuffle();
          m_sent = 0;
          m_pending = int'(m_cmd.n_rows);
          if (flag_mode == 2) flag_left = 1;        // permanent: flag every pass
        end
      end
    end
  end

  // ---------------------------------------------------- host model
  int e_idx, e_requests;
  logic need_q, in_taken;
  always @(negedge clk) if (rst_n) begin
    if (need_vec && !need_q) begin e_idx = 0; e_requests++; end
    need_q = need_vec;
    if (!in_valid || in_taken) begin
      in_valid = need_vec && (e_idx < NE) && ($urandom % 4 != 0);
      in_data  = $realtobits(real'(e[(e_idx < NE) ? e_idx : 0]));
    end
    out_ready = ($urandom % 3 != 0);
  end
  always @(posedge clk) if (rst_n) begin
    in_taken = in_valid && in_ready;
    if (in_taken) e_idx++;
  end

  real got [NA];
  int n_out, tmr_seen;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      chk("output in index order", int'(out_idx) == n_out);
      if (n_out < NA) got[n_out] = $bitstoreal(out_data);
      n_out++;
    end
    if (tmr_mismatch) tmr_seen++;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_and_wait(input logic m, input int maxr, input int flags, input bit upset);
    @(negedge clk);
    mode = m; max_retries = 4'(maxr); flag_mode = flags;
    flag_left = (flags == 1) ? 1 : 0;
    n_out = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    if (upset) begin
      repeat (8) @(negedge clk);
      seu_inject[1] = 4'b0110;
      @(negedge clk);
      seu_inject = '0;
    end
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask

  function automatic real ref_a(input int r);
    real acc = 0.0;
    for (int j = 0; j < NE; j++) acc = acc + real'(A[r][j]) * real'(e[j]);
    return acc;
  endfunction

  function automatic real ref_du(input int r);
    real acc = 0.0;
    for (int j = 0; j < NA; j++) acc = acc + real'(B[r][j]) * ref_a(j);
    return -acc;
  endfunction

  initial begin
    start = 0; mode = 0; max_retries = 0; seu_inject = '0;
    in_valid = 0; in_data = '0; out_ready = 0; ld_valid = 0; ld_pkt = '0;
    bc_ready = 0; ga_valid = 0; ga_pkt = '0;
    m_pending = 0; m_sent = 0; m_nx = 0; flag_mode = 0; flag_left = 0; ce_flags = 0;
    e_idx = 0; e_requests = 0; need_q = 0; n_out = 0; tmr_seen = 0;
    bc_taken = 0; ga_taken = 0; in_taken = 0;
    for (int r = 0; r < NA; r++) begin
      for (int j = 0; j < NE; j++) A[r][j] = int'($urandom % 9) - 4;
      for (int j = 0; j < NA; j++) B[r][j] = int'($urandom % 9) - 4;
    end
    for (int j = 0; j < NE; j++) e[j] = int'($urandom % 9) - 4;
    cmd_a = '0; cmd_a.n_in = IDX_W'(NE); cmd_a.n_rows = IDX_W'(NA);
    cmd_b = '0; cmd_b.n_in = IDX_W'(NA); cmd_b.n_rows = IDX_W'(NA);
    base_a = ADDR_W'(BASE_A); base_b = ADDR_W'(BASE_B);
    #22 rst_n = 1;

    // load pass-through in idle
    @(negedge clk);
    ld_valid = 1; ld_pkt = '0; ld_pkt.kind = PK_WRITE; ld_pkt.bank = 16'd7;
    ld_pkt.addr = 24'd42; ld_pkt.data = 64'hDEAD_BEEF;
    #1;
    chk("load forwarded", bc_valid && bc_pkt == ld_pkt && ld_ready == bc_ready);
    do @(posedge clk); while (!(ld_valid && ld_ready));
    @(negedge clk); ld_valid = 0;

    // 1. EFC
    run_and_wait(1'b0, 2, 0, 1'b0);
    chk("efc: all outputs", n_out == NA);
    for (int r = 0; r < NA; r++) chk("efc: du value", got[r] == ref_du(r));
    chk("efc: no retry, no fail", retries == 0 && !fail);
    chk("efc: ecc corrected flags counted", int'(ecc_ce_cnt) == 2 && ce_flags == 2);

    // 2. single GEMV
    run_and_wait(1'b1, 2, 0, 1'b0);
    chk("gemv: all outputs", n_out == NA);
    for (int r = 0; r < NA; r++) begin chk("gemv: value", got[r] == ref_a(r)); if (got[r] != ref_a(r)) $display("r%0d got %f exp %f", r, got[r], ref_a(r)); end

    // 3. one ABFT flag in pass 1: recompute pass 1 (host re-sends e)
    e_requests = 0;
    run_and_wait(1'b0, 2, 1, 1'b0);
    chk("retry: one recomputation", retries == 1 && !fail);
    chk("retry: e requested twice", e_requests == 2);
    chk("retry: all outputs", n_out == NA);
    for (int r = 0; r < NA; r++) chk("retry: du value", got[r] == ref_du(r));

    // 4. permanent error: give up after max_retries
    run_and_wait(1'b0, 2, 2, 1'b0);
    chk("permanent: fail raised", fail);
    chk("permanent: retries used up", retries == 2);
    chk("permanent: nothing returned", n_out == 0);
    flag_mode = 0;

    // 5. TMR upset during a run
    tmr_seen = 0;
    run_and_wait(1'b0, 2, 0, 1'b1);
    chk("tmr: mismatch seen", tmr_seen > 0 && !tmr_mismatch);
    chk("tmr: all outputs", n_out == NA && !fail);
    for (int r = 0; r < NA; r++) chk("tmr: du value", got[r] == ref_du(r));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
