// howfsc_pkg: types, sizes and arithmetic shared by the SRAM-only EFC accelerator.
//
// The accelerator computes dense matrix-vector products (GEMV) for electric
// field conjugation: the leader broadcasts a vector down a tree of SRAM chiplets,
// every SRAM bank multiplies its locally stored matrix rows with that vector, and
// the per-row results are gathered back up the tree.  This package holds
//   * the LUVOIR-A problem sizes used to size the defaults (5 channels,
//     51316 active pixels, 25736 active actuators, 2*51316*5 = 513160 field
//     states), all taken from the coronagraph parameter table of the source;
//   * the packet formats that travel down (broadcast) and up (gather) the tree;
//   * binary64 multiply and add functions (round to nearest even, subnormals
//     flushed to zero) used by the MAC;
//   * SECDED (72,64) encode/decode used by every SRAM bank.
// Packet field widths are fixed here at sizes that cover the full LUVOIR-A
// problem; the packet formats, the ECC code and the FP rounding details are this
// design's own choices, the source only names the operations.
package howfsc_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_CHANNEL   = 5;       // wavelength channels
  localparam int unsigned N_PIX       = 51316;   // active pixels
  localparam int unsigned N_ACT       = 25736;   // active actuators
  localparam int unsigned N_ESTATE    = 2 * N_PIX * N_CHANNEL;  // 513160 field states

  localparam int unsigned TREE_DEGREE = 2;       // H-tree degree
  localparam int unsigned TREE_TIERS  = 5;       // chiplet tiers below the leader
  localparam int unsigned MACS_PER_CHIPLET = 135;

  localparam int unsigned IDX_W     = 24;  // vector / row index width (>= 513160)
  localparam int unsigned ADDR_W    = 24;  // bank word address width
  localparam int unsigned BANK_ID_W = 16;  // global bank number width
  localparam int unsigned SLOT_W    = 4;   // matrix rows held per bank, plus checksum row
  localparam int unsigned ECC_W     = 72;  // stored word: 64 data + 8 check bits

  // --------------------------------------------------------------- packets
  typedef enum logic [1:0] {
    PK_WRITE = 2'd0,  // load one matrix word into one bank
    PK_GEMV  = 2'd1,  // start a GEMV pass (payload = gemv_cmd_t)
    PK_DATA  = 2'd2   // one element of the broadcast vector
  } pkt_kind_e;

  // GEMV pass descriptor, carried in the data field of a PK_GEMV packet.
  // Bank layout of one matrix: word (base + j*stride + s) holds element j of
  // the bank's local row s; local row s of bank g is global row g + s*n_banks.
  // Slot 'rows' (when abft_en) holds the column checksum of the rows.
  typedef struct packed {
    logic [6:0]        pad;
    logic              abft_en;  // compute and check the checksum row
    logic [SLOT_W-1:0] stride;   // words per vector element in the bank
    logic [SLOT_W-1:0] rows;     // local rows per bank
    logic [IDX_W-1:0]  n_rows;   // global rows of the matrix (results expected)
    logic [IDX_W-1:0]  n_in;     // vector length
  } gemv_cmd_t;

  typedef struct packed {
    pkt_kind_e            kind;
    logic [BANK_ID_W-1:0] bank;   // PK_WRITE: destination bank
    logic [ADDR_W-1:0]    addr;   // PK_WRITE: word address; PK_GEMV: matrix base
    logic [15:0]          flip;   // PK_WRITE: error injection {en1,pos1[6:0],en0,pos0[6:0]}
    logic [63:0]          data;   // word, command or vector element
  } bcast_pkt_t;

  typedef struct packed {
    logic [IDX_W-1:0] idx;        // global row index of the result
    logic [63:0]      data;       // dot product (binary64)
    logic             abft_err;   // the producing bank's checksum did not match
    logic             ecc_ue;     // the producing bank saw an uncorrectable word
    logic             ecc_ce;     // the producing bank corrected a single-bit error
  } gather_pkt_t;

  // -------------------------------------------------------------- binary64
  localparam logic [63:0] FP_QNAN = 64'h7FF8_0000_0000_0000;
  localparam logic [63:0] FP_ONE  = 64'h3FF0_0000_0000_0000;

  function automatic logic fp_is_nan(input logic [63:0] x);
    return (x[62:52] == 11'h7FF) && (x[51:0] != '0);
  endfunction

  function automatic logic fp_is_inf(input logic [63:0] x);
    return (x[62:52] == 11'h7FF) && (x[51:0] == '0);
  endfunction

  // Round a normalised significand m (bit 55 = hidden 1, bits 2:0 = guard,
  // round, sticky) with biased exponent e to binary64, nearest-even.
  function automatic logic [63:0] fp_round_pack(input logic s, input logic signed [13:0] e,
                                                input logic [55:0] m);
    logic [53:0] r;
    logic signed [13:0] ee;
    logic up;
    up = m[2] & (m[1] | m[0] | m[3]);
    r  = {1'b0, m[55:3]} + {53'd0, up};
    ee = e;
    if (r[53]) begin
      r  = r >> 1;
      ee = ee + 14'sd1;
    end
    if (ee >= 14'sd2047) return {s, 11'h7FF, 52'd0};      // overflow -> infinity
    if (ee <= 14'sd0)    return {s, 63'd0};               // underflow -> flush to zero
    return {s, ee[10:0], r[51:0]};
  endfunction

  function automatic logic [63:0] fp64_mul(input logic [63:0] a, input logic [63:0] b);
    logic s;
    logic a_zero, b_zero;
    logic [105:0] p;
    logic [55:0] m;
    logic signed [13:0] e;
    s      = a[63] ^ b[63];
    a_zero = (a[62:52] == 11'd0);   // subnormals read as zero
    b_zero = (b[62:52] == 11'd0);
    if (fp_is_nan(a) || fp_is_nan(b)) return FP_QNAN;
    if (fp_is_inf(a) || fp_is_inf(b)) begin
      if (a_zero || b_zero) return FP_QNAN;
      return {s, 11'h7FF, 52'd0};
    end
    if (a_zero || b_zero) return {s, 63'd0};
    p = {1'b1, a[51:0]} * {1'b1, b[51:0]};
    e = $signed({3'd0, a[62:52]}) + $signed({3'd0, b[62:52]}) - 14'sd1023;
    if (p[105]) begin
      m = {p[105:53], p[52], p[51], |p[50:0]};
      e = e + 14'sd1;
    end else begin
      m = {p[104:52], p[51], p[50], |p[49:0]};
    end
    return fp_round_pack(s, e, m);
  endfunction

  function automatic logic [63:0] fp64_add(input logic [63:0] a, input logic [63:0] b);
    logic [63:0] x, y;
    logic [56:0] mx, my, sum, mask;
    logic [11:0] d;
    logic signed [13:0] e;
    logic a_zero, b_zero, sticky;
    int lz;
    if (fp_is_nan(a) || fp_is_nan(b)) return FP_QNAN;
    if (fp_is_inf(a)) begin
      if (fp_is_inf(b) && (a[63] != b[63])) return FP_QNAN;
      return a;
    end
    if (fp_is_inf(b)) return b;
    a_zero = (a[62:52] == 11'd0);
    b_zero = (b[62:52] == 11'd0);
    if (a_zero && b_zero) return {a[63] & b[63], 63'd0};
    if (a_zero) return b;
    if (b_zero) return a;
    // order so that |x| >= |y|
    if (a[62:0] >= b[62:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = {1'b0, x[62:52]} - {1'b0, y[62:52]};
    mx = {2'b01, x[51:0], 3'b000};
    my = {2'b01, y[51:0], 3'b000};
    if (d >= 12'd56) begin
      my = 57'd1;                     // only the sticky bit survives
    end else begin
      mask   = (57'd1 << d) - 57'd1;
      sticky = |(my & mask);
      my     = (my >> d) | {56'd0, sticky};
    end
    e = $signed({3'd0, x[62:52]});
    if (x[63] == y[63]) begin
      sum = mx + my;
      if (sum[56]) begin
        sum = (sum >> 1) | {56'd0, sum[0]};
        e   = e + 14'sd1;
      end
    end else begin
      sum = mx - my;
      if (sum == '0) return 64'd0;    // exact cancellation gives +0
      // normalise: shift left until bit 55 is set (binary search, 6 steps)
      lz = 0;
      if (sum[55:24] == '0) begin sum = sum << 32; lz += 32; end
      if (sum[55:40] == '0) begin sum = sum << 16; lz += 16; end
      if (sum[55:48] == '0) begin sum = sum << 8;  lz += 8;  end
      if (sum[55:52] == '0) begin sum = sum << 4;  lz += 4;  end
      if (sum[55:54] == '0) begin sum = sum << 2;  lz += 2;  end
      if (sum[55]    == '0) begin sum = sum << 1;  lz += 1;  end
      e   = e - 14'(lz);
    end
    return fp_round_pack(x[63], e, sum[55:0]);
  endfunction

  // ---------------------------------------------------------------- SECDED
  // Extended Hamming (72,64): codeword bit k (1..71) is Hamming position k,
  // check bits sit at positions 1,2,4,...,64, data fills the others in
  // ascending order, bit 0 is overall parity.  Check bit b is the parity of
  // the positions whose index has bit b set (SEC_MASK[b], built once at
  // elaboration), so the syndrome of a word is directly the position of a
  // single flipped bit.  Written without per-bit loops because every bank
  // instantiates an encoder and a decoder.
  typedef logic [6:0][71:0] sec_mask_t;

  function automatic sec_mask_t sec_make_mask();
    sec_mask_t m;
    m = '0;
    for (int b = 0; b < 7; b++)
      for (int k = 1; k < 72; k++) m[b][k] = k[b];
    return m;
  endfunction

  localparam sec_mask_t SEC_MASK = sec_make_mask();

  // data bits into their positions, check and parity bits given
  function automatic logic [71:0] sec_place(input logic [63:0] d, input logic [6:0] c,
                                            input logic p);
    return {d[63:57], c[6], d[56:26], c[5], d[25:11], c[4], d[10:4], c[3],
            d[3:1], c[2], d[0], c[1], c[0], p};
  endfunction

  function automatic logic [63:0] sec_extract(input logic [71:0] cw);
    return {cw[71:65], cw[63:33], cw[31:17], cw[15:9], cw[7:5], cw[3]};
  endfunction

  function automatic logic [6:0] sec_syndrome(input logic [71:0] cw);
    logic [6:0] c;
    for (int b = 0; b < 7; b++) c[b] = ^(cw & SEC_MASK[b]);
    return c;
  endfunction

  function automatic logic [71:0] secded_encode(input logic [63:0] d);
    logic [71:0] cw;
    cw = sec_place(d, sec_syndrome(sec_place(d, 7'd0, 1'b0)), 1'b0);
    cw[0] = ^cw[71:1];
    return cw;
  endfunction

  typedef struct packed {
    logic [63:0] data;
    logic        corrected;
    logic        uncorrectable;
  } secded_res_t;

  function automatic secded_res_t secded_decode(input logic [71:0] cw_in);
    secded_res_t r;
    logic [71:0] cw;
    logic [6:0] syn;
    cw  = cw_in;
    syn = sec_syndrome(cw);
    r.corrected     = 1'b0;
    r.uncorrectable = 1'b0;
    if (^cw) begin
      // odd number of flips: a single error at position syn (0 = parity bit)
      if (syn < 7'd72) begin
        cw = cw ^ (72'd1 << syn);
        r.corrected = 1'b1;
      end else begin
        r.uncorrectable = 1'b1;
      end
    end else if (syn != '0) begin
      r.uncorrectable = 1'b1;                // even number of flips
    end
    r.data = sec_extract(cw);
    return r;
  endfunction

endpackage
