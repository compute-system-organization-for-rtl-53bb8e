// bank_pe: one SRAM bank with its co-located MAC (one row of the chiplet
// figure: "SRAM Bank | MAC").
//
// The bank holds 'rows' rows of a matrix, stored element-interleaved: word
// base + j*stride + s is element j of local row s, and local row s of bank g is
// global row g + s*n_pe.  With ABFT on, slot s = rows holds the column
// checksum (the sum of the bank's rows), written by the host like any matrix
// word.  A GEMV pass runs as follows:
//   1. PK_GEMV packet: latch the descriptor, clear the accumulators.
//   2. Every PK_DATA packet is one vector element x_j.  The PE reads the
//      'rows' (+1 checksum) words of column j, one per cycle, and the MAC adds
//      word*x_j into accumulator s.  It accepts the next element in the cycle
//      it issues the last read, so a bank sustains one MAC per cycle and one
//      vector element every rows(+1) cycles.
//   3. ABFT check (abft_en): the same MAC sums the row results (times 1.0) and
//      subtracts the checksum result (times -1.0); a difference larger than
//      2^-ABFT_TOL of the larger operand sets abft_err.
//   4. Gather: each row result leaves as a gather packet tagged with its global
//      row index; rows at or beyond n_rows are skipped.
// PK_WRITE packets addressed to this bank (in idle) are SECDED encoded and
// written; 'flip' can flip up to two codeword bits to test the ECC.  Every
// read is decoded: single-bit errors are corrected and reported (ecc_ce),
// double-bit errors are reported (ecc_ue) in the gather packets.
// Timing: SRAM read 1 cycle, decode + MAC combinational in the next cycle.
// The source fixes one FP64 MAC per bank, row-wise partitioning with results
// gathered by the leader, ECC on the memory and ABFT checksums; the storage
// layout, packet handling, checksum tolerance and error injection are this
// design's own.  inj_valid/inj_bank flip mantissa bit 51 of one MAC result
// (fault injection for testing ABFT); tie inj_valid low in a real build.
// The tolerance test assumes no heavy cancellation: a row sum much smaller
// than its terms can raise a false alarm, which only costs a recomputation.
// SLOTS accumulators are built; the default 5 holds the 4 rows per bank of the
// full LUVOIR-A problem (25736 rows over 8370 banks) plus the checksum row.  A
// command with rows + abft_en > SLOTS is outside the design's range.
module bank_pe
  import howfsc_pkg::*;
#(
  parameter int unsigned WORDS    = 2694480,
  parameter int unsigned ABFT_TOL = 32,
  parameter int unsigned SLOTS    = 5        // accumulators: rows per bank + checksum
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [BANK_ID_W-1:0] pe_id,    // global bank number g
  input  logic [BANK_ID_W-1:0] n_pe,     // number of banks in the system
  // broadcast in
  input  logic                 bc_valid,
  output logic                 bc_ready,
  input  bcast_pkt_t           bc_pkt,
  // gather out
  output logic                 ga_valid,
  input  logic                 ga_ready,
  output gather_pkt_t          ga_pkt,
  // fault injection (test only)
  input  logic                 inj_valid,
  input  logic [BANK_ID_W-1:0] inj_bank
);
  localparam int unsigned NSLOT = SLOTS;
  localparam int unsigned SIW   = (SLOTS > 1) ? $clog2(SLOTS) : 1;  // accumulator index width
  localparam int unsigned AW    = (WORDS > 1) ? $clog2(WORDS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_CHECK, S_GATHER} state_e;
  state_e state;

  gemv_cmd_t           cmd;      // pad bits unused
  logic [ADDR_W-1:0]   cur_col, next_col;
  logic [IDX_W-1:0]    j_cnt;
  logic [63:0]         x_q;
  logic                issuing;
  logic [SLOT_W-1:0]   slot;
  logic [SLOT_W:0]     n_slots;
  logic                last_issue;
  // read stage
  logic                rd_v;
  logic [SLOT_W-1:0]   rd_slot;
  logic [63:0]         rd_x;
  // accumulators
  logic [63:0]         acc [NSLOT];
  // ABFT check
  logic [SLOT_W:0]     chk_i;
  logic [63:0]         chk_sum;
  logic                abft_err;
  // gather
  logic [SLOT_W:0]     g_slot;
  logic [IDX_W+1:0]    g_row;
  // ECC
  logic                ue_seen, ce_seen;

  // memory
  logic              mem_we, mem_re;
  logic [AW-1:0]     mem_addr;
  logic [ECC_W-1:0]  mem_wdata, mem_rdata;
  logic [63:0]       rd_data;
  logic              rd_ce, rd_ue;

  sram_bank #(.WORDS(WORDS), .W(ECC_W)) u_mem (
    .clk(clk), .we(mem_we), .re(mem_re), .addr(mem_addr),
    .wdata(mem_wdata), .rdata(mem_rdata)
  );

  secded_dec u_dec (
    .cw_in(mem_rdata), .data_out(rd_data), .corrected(rd_ce), .uncorrectable(rd_ue)
  );

  // MAC, shared between the dot products and the checksum test
  logic [63:0] mac_a, mac_b, mac_c, mac_y, mac_y_inj;
  fp64_mac u_mac (.a(mac_a), .b(mac_b), .acc_in(mac_c), .acc_out(mac_y));

  logic inj_hit;
  assign inj_hit   = inj_valid && (inj_bank == pe_id);
  assign mac_y_inj = mac_y ^ {12'd0, inj_hit, 51'd0};

  assign n_slots    = {1'b0, cmd.rows} + {{SLOT_W{1'b0}}, cmd.abft_en};
  assign last_issue = issuing && ({1'b0, slot} == n_slots - 1'b1);

  always_comb begin
    bc_ready = 1'b0;
    unique case (state)
      S_IDLE:  bc_ready = 1'b1;
      S_RUN:   bc_ready = (j_cnt < cmd.n_in) && (!issuing || last_issue);
      default: bc_ready = 1'b0;
    endcase
  end

  logic bc_fire;
  assign bc_fire = bc_valid && bc_ready;

  // memory port
  logic [71:0] enc_cw, wr_cw;
  secded_enc u_enc (.data_in(bc_pkt.data), .cw_out(enc_cw));

  always_comb begin
    wr_cw = enc_cw;
    if (bc_pkt.flip[7])  wr_cw[bc_pkt.flip[6:0]]  = ~wr_cw[bc_pkt.flip[6:0]];
    if (bc_pkt.flip[15]) wr_cw[bc_pkt.flip[14:8]] = ~wr_cw[bc_pkt.flip[14:8]];
    mem_we    = bc_fire && (state == S_IDLE) && (bc_pkt.kind == PK_WRITE) && (bc_pkt.bank == pe_id);
    mem_wdata = wr_cw;
    mem_re    = (state == S_RUN) && issuing;
    mem_addr  = mem_we ? AW'(bc_pkt.addr) : AW'(cur_col + ADDR_W'(slot));
  end

  // MAC operand select
  always_comb begin
    mac_a = rd_data;
    mac_b = rd_x;
    mac_c = acc[SIW'(rd_slot)];
    if (state == S_CHECK) begin
      if (chk_i < {1'b0, cmd.rows}) begin
        mac_a = acc[SIW'(chk_i[SLOT_W-1:0])];
        mac_b = FP_ONE;
      end else begin
        mac_a = acc[SIW'(cmd.rows)];
        mac_b = {1'b1, FP_ONE[62:0]};   // -1.0
      end
      mac_c = chk_sum;
    end
  end

  // difference test: |d| > 2^-ABFT_TOL * max(|sum|, |chk|) (exponent compare)
  function automatic logic abft_mismatch(input logic [63:0] d, input logic [63:0] s,
                                         input logic [63:0] c);
    logic [11:0] ref_e;
    ref_e = (s[62:52] > c[62:52]) ? {1'b0, s[62:52]} : {1'b0, c[62:52]};
    if (d[62:52] == 11'd0) return 1'b0;
    return ({1'b0, d[62:52]} + 12'(ABFT_TOL)) > ref_e;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cmd      <= '0;
      cur_col  <= '0;
      next_col <= '0;
      j_cnt    <= '0;
      x_q      <= '0;
      issuing  <= 1'b0;
      slot     <= '0;
      rd_v     <= 1'b0;
      rd_slot  <= '0;
      rd_x     <= '0;
      chk_i    <= '0;
      chk_sum  <= '0;
      abft_err <= 1'b0;
      g_slot   <= '0;
      g_row    <= '0;
      ue_seen  <= 1'b0;
      ce_seen  <= 1'b0;
      for (int i = 0; i < NSLOT; i++) acc[i] <= '0;
    end else begin
      rd_v <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (bc_fire && bc_pkt.kind == PK_GEMV) begin
            cmd      <= gemv_cmd_t'(bc_pkt.data);
            next_col <= bc_pkt.addr;
            j_cnt    <= '0;
            issuing  <= 1'b0;
            abft_err <= 1'b0;
            ue_seen  <= 1'b0;
            ce_seen  <= 1'b0;
            chk_sum  <= '0;
            for (int i = 0; i < NSLOT; i++) acc[i] <= '0;
            state    <= S_RUN;
          end
        end

        S_RUN: begin
          // issue one read per cycle for the current element
          if (issuing) begin
            rd_v    <= 1'b1;
            rd_slot <= slot;
            rd_x    <= x_q;
            slot    <= slot + 1'b1;
            if (last_issue) issuing <= 1'b0;
          end
          // accept the next element
          if (bc_fire && bc_pkt.kind == PK_DATA) begin
            x_q      <= bc_pkt.data;
            cur_col  <= next_col;
            next_col <= next_col + ADDR_W'(cmd.stride);
            j_cnt    <= j_cnt + 1'b1;
            issuing  <= (n_slots != '0);
            slot     <= '0;
          end
          // MAC stage
          if (rd_v) begin
            acc[SIW'(rd_slot)] <= mac_y_inj;
            if (rd_ce) ce_seen <= 1'b1;
            if (rd_ue) ue_seen <= 1'b1;
          end
          // done when every element is consumed and the pipe is empty
          if (j_cnt == cmd.n_in && !issuing && !rd_v && !bc_fire) begin
            chk_i  <= '0;
            g_slot <= '0;
            g_row  <= (IDX_W + 2)'(pe_id);
            state  <= cmd.abft_en ? S_CHECK : S_GATHER;
          end
        end

        S_CHECK: begin
          chk_sum <= mac_y_inj;
          chk_i   <= chk_i + 1'b1;
          if (chk_i == {1'b0, cmd.rows}) begin
            abft_err <= abft_mismatch(mac_y_inj, chk_sum, acc[SIW'(cmd.rows)]);
            state    <= S_GATHER;
          end
        end

        S_GATHER: begin
          if (g_slot >= {1'b0, cmd.rows} || g_row >= (IDX_W + 2)'(cmd.n_rows)) begin
            state <= S_IDLE;
          end else if (ga_ready) begin
            g_slot <= g_slot + 1'b1;
            g_row  <= g_row + (IDX_W + 2)'(n_pe);
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    ga_valid        = (state == S_GATHER) && (g_slot < {1'b0, cmd.rows})
                      && (g_row < (IDX_W + 2)'(cmd.n_rows));
    ga_pkt.idx      = g_row[IDX_W-1:0];
    ga_pkt.data     = acc[SIW'(g_slot[SLOT_W-1:0])];
    ga_pkt.abft_err = abft_err;
    ga_pkt.ecc_ue   = ue_seen;
    ga_pkt.ecc_ce   = ce_seen;
  end
endmodule
