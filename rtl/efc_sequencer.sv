// efc_sequencer: leader-side controller of the EFC accelerator.
//
// Electric field conjugation with a precomputed gain is du = -M (J^T E): two
// chained matrix-vector products.  The sequencer runs them as two GEMV passes
// over the chiplet tree:
//   pass 1: broadcast PK_GEMV(cmd_a, base_a), then stream the field vector E
//           from the host (need_vec is high while it is wanted), gather
//           J^T E into the vector buffer (results arrive out of order, tagged
//           with their row index);
//   pass 2: broadcast PK_GEMV(cmd_b, base_b), stream the buffered J^T E, gather
//           M (J^T E) into the output buffer;
//   output: stream the result to the host in index order, negated (du).
// mode = 1 runs pass 1 alone and returns its result unnegated (a plain GEMV,
// e.g. for the J du precomputation when the matrix fits the banks).
// If any gathered result carries an ABFT mismatch or an uncorrectable ECC
// flag, the pass is recomputed, up to max_retries times; pass 1 then asks the
// host for E again (need_vec rises again), pass 2 replays its buffer.  When the
// retries are used up, 'fail' is set and no result is returned.
// While idle, host load packets (PK_WRITE) are forwarded to the tree.
// The controller state lives in a TMR register (tmr_reg); seu_inject reaches
// its three copies for testing and is tied to zero in a real build.
// From the source: the two GEMVs, broadcast of the input vector, gather by the
// leader, negation, recomputation on an ABFT detection and TMR on state
// machines.  Buffer organisation, retry policy and the host interface are
// this design's own.
// Lint reports rst_n as used both asynchronously (register resets) and
// synchronously: the second use is only the 'disable iff' of the handshake
// assertions at the end, not logic.
module efc_sequencer
  import howfsc_pkg::*;
#(
  parameter int unsigned VEC_DEPTH = N_ACT,  // J^T E buffer (pass 1 results)
  parameter int unsigned OUT_DEPTH = N_ACT   // result buffer
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  input  logic              mode,          // 0: EFC (two passes), 1: single GEMV
  input  gemv_cmd_t         cmd_a,
  input  logic [ADDR_W-1:0] base_a,
  input  gemv_cmd_t         cmd_b,
  input  logic [ADDR_W-1:0] base_b,
  input  logic [3:0]        max_retries,
  output logic              busy,
  output logic              done,          // one-cycle pulse at the end of a run
  output logic              fail,
  output logic [3:0]        retries,       // recomputations in the last run
  output logic [15:0]       ecc_ce_cnt,    // results from banks that corrected an error
  output logic              tmr_mismatch,
  input  logic [2:0][3:0]   seu_inject,
  // host vector in
  output logic              need_vec,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [63:0]       in_data,
  // host result out
  output logic              out_valid,
  input  logic              out_ready,
  output logic [IDX_W-1:0]  out_idx,
  output logic [63:0]       out_data,
  // host matrix load
  input  logic              ld_valid,
  output logic              ld_ready,
  input  bcast_pkt_t        ld_pkt,
  // tree root
  output logic              bc_valid,
  input  logic              bc_ready,
  output bcast_pkt_t        bc_pkt,
  input  logic              ga_valid,
  output logic              ga_ready,
  input  gather_pkt_t       ga_pkt
);
  typedef enum logic [3:0] {
    Q_IDLE, Q_P1_CMD, Q_P1_STREAM, Q_P1_GATHER,
    Q_P2_CMD, Q_P2_STREAM, Q_P2_GATHER, Q_OUTPUT, Q_DONE
  } seq_state_e;

  localparam int unsigned VAW = (VEC_DEPTH > 1) ? $clog2(VEC_DEPTH) : 1;
  localparam int unsigned OAW = (OUT_DEPTH > 1) ? $clog2(OUT_DEPTH) : 1;

  seq_state_e state, state_d;
  logic [3:0] state_q;

  tmr_reg #(.W(4), .RESET_VAL(4'(Q_IDLE))) u_state (
    .clk(clk), .rst_n(rst_n), .d(4'(state_d)), .upset(seu_inject),
    .q(state_q), .mismatch(tmr_mismatch)
  );
  assign state = seq_state_e'(state_q);

  logic [63:0] vbuf [VEC_DEPTH];
  logic [63:0] obuf [OUT_DEPTH];

  gemv_cmd_t         ca, cb;
  logic [ADDR_W-1:0] ba, bb;
  logic              mode_q;
  logic [3:0]        max_q;
  logic [IDX_W:0]    cnt;
  logic              pass_err;

  logic bc_fire, ga_fire, out_fire;
  assign bc_fire  = bc_valid && bc_ready;
  assign ga_fire  = ga_valid && ga_ready;
  assign out_fire = out_valid && out_ready;

  // ---------------------------------------------------------- datapath muxes
  always_comb begin
    bc_valid  = 1'b0;
    bc_pkt    = '0;
    ld_ready  = 1'b0;
    in_ready  = 1'b0;
    ga_ready  = 1'b0;
    out_valid = 1'b0;
    out_idx   = cnt[IDX_W-1:0];
    out_data  = obuf[OAW'(cnt)] ^ {!mode_q, 63'd0};
    need_vec  = (state == Q_P1_STREAM);
    unique case (state)
      Q_IDLE: begin
        bc_valid = ld_valid && (ld_pkt.kind == PK_WRITE);
        bc_pkt   = ld_pkt;
        ld_ready = bc_ready || (ld_pkt.kind != PK_WRITE);
      end
      Q_P1_CMD, Q_P2_CMD: begin
        bc_valid    = 1'b1;
        bc_pkt.kind = PK_GEMV;
        bc_pkt.addr = (state == Q_P1_CMD) ? ba : bb;
        bc_pkt.data = (state == Q_P1_CMD) ? ca : cb;
      end
      Q_P1_STREAM: begin
        bc_valid    = in_valid && (cnt < {1'b0, ca.n_in});
        bc_pkt.kind = PK_DATA;
        bc_pkt.data = in_data;
        in_ready    = bc_ready && (cnt < {1'b0, ca.n_in});
      end
      Q_P2_STREAM: begin
        bc_valid    = (cnt < {1'b0, cb.n_in});
        bc_pkt.kind = PK_DATA;
        bc_pkt.data = vbuf[VAW'(cnt)];
      end
      Q_P1_GATHER, Q_P2_GATHER: ga_ready = 1'b1;
      Q_OUTPUT: out_valid = 1'b1;
      default: ;
    endcase
  end

  logic [IDX_W:0] n_rows_cur;
  assign n_rows_cur = (state == Q_P2_GATHER || (state == Q_OUTPUT && !mode_q))
                      ? {1'b0, cb.n_rows} : {1'b0, ca.n_rows};

  // ------------------------------------------------------------ next state
  always_comb begin
    state_d = state;
    unique case (state)
      Q_IDLE:      if (start) state_d = Q_P1_CMD;
      Q_P1_CMD:    if (bc_fire) state_d = Q_P1_STREAM;
      Q_P1_STREAM: if (cnt == {1'b0, ca.n_in}) state_d = Q_P1_GATHER;
      Q_P2_CMD:    if (bc_fire) state_d = Q_P2_STREAM;
      Q_P2_STREAM: if (cnt == {1'b0, cb.n_in}) state_d = Q_P2_GATHER;
      Q_P1_GATHER, Q_P2_GATHER:
        if (cnt == n_rows_cur) begin
          if (pass_err) state_d = (retries < max_q) ? ((state == Q_P1_GATHER) ? Q_P1_CMD : Q_P2_CMD)
                                                    : Q_DONE;
          else if (state == Q_P1_GATHER && !mode_q) state_d = Q_P2_CMD;
          else state_d = Q_OUTPUT;
        end
      Q_OUTPUT:    if (out_fire && (cnt + 1'b1 == n_rows_cur)) state_d = Q_DONE;
      Q_DONE:      state_d = Q_IDLE;
      default:     state_d = Q_IDLE;
    endcase
  end

  // ------------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ca         <= '0;
      cb         <= '0;
      ba         <= '0;
      bb         <= '0;
      mode_q     <= 1'b0;
      max_q      <= '0;
      cnt        <= '0;
      pass_err   <= 1'b0;
      retries    <= '0;
      fail       <= 1'b0;
      ecc_ce_cnt <= '0;
    end else begin
      if (state != state_d) cnt <= '0;
      else if (bc_fire && bc_pkt.kind == PK_DATA) cnt <= cnt + 1'b1;
      else if (ga_fire || out_fire) cnt <= cnt + 1'b1;

      unique case (state)
        Q_IDLE: if (start) begin
          ca       <= cmd_a;
          cb       <= cmd_b;
          ba       <= base_a;
          bb       <= base_b;
          mode_q   <= mode;
          max_q    <= max_retries;
          retries  <= '0;
          fail     <= 1'b0;
          ecc_ce_cnt <= '0;
        end
        Q_P1_CMD, Q_P2_CMD: pass_err <= 1'b0;
        Q_P1_GATHER, Q_P2_GATHER: begin
          if (ga_fire) begin
            if (ga_pkt.abft_err || ga_pkt.ecc_ue) pass_err <= 1'b1;
            if (ga_pkt.ecc_ce) ecc_ce_cnt <= ecc_ce_cnt + 1'b1;
          end
          if (cnt == n_rows_cur && pass_err) begin
            if (retries < max_q) retries <= retries + 1'b1;
            else fail <= 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

  // buffers (no reset: written before read)
  always_ff @(posedge clk) begin
    if (ga_fire) begin
      if (state == Q_P1_GATHER && !mode_q) vbuf[VAW'(ga_pkt.idx)] <= ga_pkt.data;
      else                                 obuf[OAW'(ga_pkt.idx)] <= ga_pkt.data;
    end
  end

  assign busy = (state != Q_IDLE);
  assign done = (state == Q_DONE);

  // rules of the interfaces
  a_ga_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    ga_fire |-> ({1'b0, ga_pkt.idx} < n_rows_cur));
  a_bc_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (bc_valid && !bc_ready && state != Q_IDLE && state != Q_P1_STREAM) |=> bc_valid);
endmodule
