// bank_pe_tb: one bank PE (global bank 1 of 3) holding rows 1 and 4 of a
// 7 x 8 matrix (local slot 2 would be row 7, beyond the matrix, and is zero),
// plus the ABFT checksum row.  Matrix and vector are small integers, so every
// dot product is exact and the expected values are computed directly here.
// Checks: result values and row tags; that a write addressed to another bank
// is ignored; the throughput of one MAC per cycle (consecutive vector elements
// accepted rows+1 cycles apart, rows apart with ABFT off); ABFT detection of an
// injected MAC fault; SECDED correction of a single flipped bit and
// detection of a double flip; a pass in which the bank holds no rows.
module bank_pe_tb;
  import howfsc_pkg::*;
  localparam int WORDS = 256;
  localparam int NPE = 3, ID = 1;
  localparam int NIN = 8, NROWS = 7, ROWS = 3, STRIDE = 4, BASE = 16;

  logic clk = 0, rst_n = 0;
  logic bc_valid, bc_ready, ga_valid, ga_ready, inj_valid;
  bcast_pkt_t bc_pkt;
  gather_pkt_t ga_pkt;
  logic [BANK_ID_W-1:0] inj_bank;
  int checks = 0, failures = 0;

  bank_pe #(.WORDS(WORDS), .ABFT_TOL(32)) dut (
    .clk, .rst_n, .pe_id(BANK_ID_W'(ID)), .n_pe(BANK_ID_W'(NPE)),
    .bc_valid, .bc_ready, .bc_pkt, .ga_valid, .ga_ready, .ga_pkt,
    .inj_valid, .inj_bank
  );

  always #5 clk = ~clk;

  task automatic chk(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int A [NROWS][NIN];
  int x [NIN];
  longint cyc;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input bcast_pkt_t p);
    @(negedge clk);
    bc_valid = 1; bc_pkt = p;
    do @(posedge clk); while (!bc_ready);
    #1 bc_valid = 0;
  endtask

  function automatic bcast_pkt_t wr(input int bank, input int addr, input int val,
                                    input logic [15:0] flip);
    bcast_pkt_t p;
    p = '0;
    p.kind = PK_WRITE; p.bank = BANK_ID_W'(bank); p.addr = ADDR_W'(addr);
    p.data = $realtobits(real'(val)); p.flip = flip;
    return p;
  endfunction

  function automatic int elem(input int s, input int j);
    int r;
    if (s == ROWS) begin      // checksum slot
      int t = 0;
      for (int q = 0; q < ROWS; q++) t += elem(q, j);
      return t;
    end
    r = ID + s * NPE;
    return (r < NROWS) ? A[r][j] : 0;
  endfunction

  task automatic load(input int bank);
    for (int j = 0; j < NIN; j++)
      for (int s = 0; s <= ROWS; s++)
        send(wr(bank, BASE + j * STRIDE + s, elem(s, j), 16'h0));
  endtask

  // runs one pass; returns the number of cycles between the first and last
  // vector element being accepted, and collects the results
  task automatic run(input logic abft, input int nrows, input bit inject,
                     output longint span, output int nres, output int got_idx [4],
                     output real got_val [4], output logic aerr, output logic ue,
                     output logic ce);
    bcast_pkt_t p;
    gemv_cmd_t c;
    longint first;
    c = '0;
    c.abft_en = abft; c.stride = SLOT_W'(STRIDE); c.rows = SLOT_W'(ROWS);
    c.n_rows = IDX_W'(nrows); c.n_in = IDX_W'(NIN);
    p = '0; p.kind = PK_GEMV; p.addr = ADDR_W'(BASE); p.data = c;
    send(p);
    fork
      begin
        for (int j = 0; j < NIN; j++) begin
          p = '0; p.kind = PK_DATA; p.data = $realtobits(real'(x[j]));
          @(negedge clk);
          bc_valid = 1; bc_pkt = p;
          do @(posedge clk); while (!bc_ready);
          if (j == 0) first = cyc;
          if (j == NIN - 1) span = cyc - first;
          #1 bc_valid = 0;
        end
      end
      if (inject) begin
        // one-cycle fault pulse in the middle of the pass
        repeat (10) @(negedge clk);
        inj_valid = 1; inj_bank = BANK_ID_W'(ID);
        @(negedge clk);
        inj_valid = 0;
      end
      begin
        nres = 0; aerr = 0; ue = 0; ce = 0;
        ga_ready = 0;
        repeat (NIN * STRIDE + 40) begin
          @(negedge clk); ga_ready = ($urandom % 2 == 0);
          @(posedge clk);
          if (ga_valid && ga_ready) begin
            if (nres < 4) begin
              got_idx[nres] = int'(ga_pkt.idx);
              got_val[nres] = $bitstoreal(ga_pkt.data);
            end
            aerr |= ga_pkt.abft_err; ue |= ga_pkt.ecc_ue; ce |= ga_pkt.ecc_ce;
            nres++;
          end
        end
      end
    join
  endtask

  function automatic int dot(input int r);
    int t = 0;
    for (int j = 0; j < NIN; j++) t += A[r][j] * x[j];
    return t;
  endfunction

  task automatic check_results(input string tag, input int nres, input int gi [4],
                               input real gv [4]);
    chk({tag, ": two results"}, nres == 2);
    chk({tag, ": row tags 1 and 4"}, gi[0] == 1 && gi[1] == 4);
    chk({tag, ": row 1 value"}, gv[0] == real'(dot(1)));
    chk({tag, ": row 4 value"}, gv[1] == real'(dot(4)));
  endtask

  initial begin
    longint span;
    int nres, gi [4];
    real gv [4];
    logic aerr, ue, ce;
    bc_valid = 0; bc_pkt = '0; ga_ready = 0; inj_valid = 0; inj_bank = '0; cyc = 0;
    for (int r = 0; r < NROWS; r++)
      for (int j = 0; j < NIN; j++) A[r][j] = int'($urandom % 17) - 8;
    for (int j = 0; j < NIN; j++) x[j] = int'($urandom % 17) - 8;
    #22 rst_n = 1;

    load(ID);
    // a write addressed to another bank must not land here
    send(wr(ID + 1, BASE, 999, 16'h0));

    // 1. plain pass with ABFT
    run(1'b1, NROWS, 1'b0, span, nres, gi, gv, aerr, ue, ce);
    check_results("abft pass", nres, gi, gv);
    chk("abft pass: no error flags", !aerr && !ue && !ce);
    chk("abft pass: one element per rows+1 cycles", span == longint'((NIN - 1) * (ROWS + 1)));

    // 2. without ABFT: one element per 'rows' cycles
    run(1'b0, NROWS, 1'b0, span, nres, gi, gv, aerr, ue, ce);
    check_results("no-abft pass", nres, gi, gv);
    chk("no-abft pass: one element per rows cycles", span == longint'((NIN - 1) * ROWS));

    // 3. injected MAC fault is caught by the checksum
    run(1'b1, NROWS, 1'b1, span, nres, gi, gv, aerr, ue, ce);
    chk("fault pass: abft_err raised", aerr);

    // 4. single-bit flip in a stored word is corrected
    send(wr(ID, BASE + 2 * STRIDE + 1, elem(1, 2), 16'h0085));   // flip codeword bit 5
    run(1'b1, NROWS, 1'b0, span, nres, gi, gv, aerr, ue, ce);
    check_results("ce pass", nres, gi, gv);
    chk("ce pass: corrected flagged, no abft error", ce && !ue && !aerr);

    // 5. double flip is detected
    send(wr(ID, BASE + 2 * STRIDE + 1, elem(1, 2), 16'h8A85));   // bits 5 and 10
    run(1'b1, NROWS, 1'b0, span, nres, gi, gv, aerr, ue, ce);
    chk("ue pass: uncorrectable flagged", ue);
    send(wr(ID, BASE + 2 * STRIDE + 1, elem(1, 2), 16'h0));

    // 6. a matrix with a single row: this bank holds none of it
    run(1'b1, 1, 1'b0, span, nres, gi, gv, aerr, ue, ce);
    chk("empty pass: no results", nres == 0);
    chk("empty pass: back to idle", bc_ready);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
