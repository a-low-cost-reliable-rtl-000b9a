// rtm_llc_pkg: types, sizes and arithmetic shared by the reliable racetrack LLC.
//
// The cache stores 64-byte (512-bit) blocks. Every block has a 64-bit SEC-DED
// field in a side store (eight extended-Hamming (72,64) words). A dirty block
// that BDI (Base-Delta-Immediate) compresses well enough is stored instead as
// one codeword of an extended binary BCH code that corrects three and detects
// four errors (TEC-QED). That codeword fills the whole 512-bit line:
//   bits [26:0]   BCH check bits (remainder of m(x)*x^27 mod g(x))
//   bits [510:27] 484-bit message = compressed payload
//   bit  [511]    overall parity over bits [510:0]
// The code is BCH(511,484), t=3, over GF(2^9) with primitive polynomial
// p(x) = x^9 + x^4 + 1. Its generator is g(x) = m1(x) m3(x) m5(x), the product
// of the minimal polynomials of alpha, alpha^3 and alpha^5, which multiplies
// out to the degree-27 polynomial in BCH_G below.
//
// The compressed payload (484 bits) has fixed fields:
//   [3:0] encoding, [67:4] base, [99:68] immediate mask, [355:100] deltas.
//
// The choice of BCH, of the (72,64) SEC-DED granularity and of the payload
// layout is this design's own; the paper names only "TEC-QED", "SEC-DED" and
// "BDI".
package rtm_llc_pkg;

  // ---------------- Cache geometry ----------------
  localparam int unsigned LINE_BITS  = 512;           // 64-byte block
  localparam int unsigned WORD_BITS  = 64;            // SEC-DED word
  localparam int unsigned NWORDS     = LINE_BITS / WORD_BITS;
  localparam int unsigned SECDED_CB  = 8;             // check bits per word
  localparam int unsigned CHECK_BITS = NWORDS * SECDED_CB;  // 64 per line
  localparam int unsigned ADDR_W     = 32;            // byte address
  localparam int unsigned OFFSET_W   = 6;
  localparam int unsigned LADDR_W    = ADDR_W - OFFSET_W;  // line address

  typedef logic [LINE_BITS-1:0]  line_t;
  typedef logic [CHECK_BITS-1:0] check_t;
  typedef logic [LADDR_W-1:0]    laddr_t;

  // ---------------- TEC-QED (extended BCH) ----------------
  localparam int unsigned GF_M     = 9;
  localparam int unsigned GF_N     = 511;             // 2^9 - 1
  localparam int unsigned BCH_R    = 27;              // BCH check bits
  localparam int unsigned BCH_K    = GF_N - BCH_R;    // 484 message bits
  localparam int unsigned TQ_CHECK = BCH_R + 1;       // with overall parity
  localparam logic [BCH_R:0] BCH_G = 28'hD612B79;     // g(x), bit i = x^i
  localparam logic [GF_M:0]  GF_POLY = 10'b10_0001_0001; // x^9+x^4+1

  typedef logic [GF_M-1:0] gf_t;
  typedef logic [BCH_K-1:0] payload_t;

  function automatic gf_t gf_mul(gf_t a, gf_t b);
    logic [2*GF_M-2:0] p;
    p = '0;
    for (int i = 0; i < GF_M; i++)
      if (b[i]) p ^= ({{(GF_M-1){1'b0}}, a} << i);
    for (int i = 2*GF_M-2; i >= GF_M; i--)
      if (p[i]) p ^= ({{(GF_M-2){1'b0}}, GF_POLY} << (i - GF_M));
    return p[GF_M-1:0];
  endfunction

  function automatic gf_t gf_sq(gf_t a);
    return gf_mul(a, a);
  endfunction

  // a^-1 = a^(2^9-2) = a^2 * a^4 * ... * a^256
  function automatic gf_t gf_inv(gf_t a);
    gf_t r, s;
    r = 9'd1;
    s = a;
    for (int k = 1; k < GF_M; k++) begin
      s = gf_sq(s);
      r = gf_mul(r, s);
    end
    return r;
  endfunction

  // alpha^e for 0 <= e < 511 (alpha = x)
  function automatic gf_t gf_alpha_pow(int unsigned e);
    gf_t r;
    r = 9'd1;
    for (int unsigned i = 0; i < e; i++) r = gf_mul(r, 9'd2);
    return r;
  endfunction

  // Table of alpha^0 .. alpha^510, entry i at bits [9*i +: 9]
  function automatic logic [GF_N*GF_M-1:0] gf_alpha_table();
    logic [GF_N*GF_M-1:0] t;
    gf_t r;
    r = 9'd1;
    for (int i = 0; i < GF_N; i++) begin
      t[i*GF_M +: GF_M] = r;
      r = gf_mul(r, 9'd2);
    end
    return t;
  endfunction

  localparam logic [GF_N*GF_M-1:0] ALPHA_TBL = gf_alpha_table();

  function automatic gf_t alpha(int unsigned e);
    return ALPHA_TBL[(e % GF_N)*GF_M +: GF_M];
  endfunction

  // ---------------- BDI compression ----------------
  typedef enum logic [3:0] {
    BDI_ZEROS = 4'd0,   // all-zero block
    BDI_REP8  = 4'd1,   // one 8-byte value repeated
    BDI_B8D1  = 4'd2,   // 8-byte base, 1-byte deltas
    BDI_B4D1  = 4'd3,
    BDI_B8D2  = 4'd4,
    BDI_B2D1  = 4'd5,
    BDI_B4D2  = 4'd6,
    BDI_B8D4  = 4'd7,
    BDI_NONE  = 4'd15   // not compressible
  } bdi_enc_e;

  localparam int unsigned PL_ENC_LSB   = 0;
  localparam int unsigned PL_BASE_LSB  = 4;
  localparam int unsigned PL_MASK_LSB  = 68;
  localparam int unsigned PL_DELTA_LSB = 100;

  // Base and delta sizes in bytes of the base+delta encodings
  function automatic int unsigned bdi_base_bytes(bdi_enc_e e);
    case (e)
      BDI_B8D1, BDI_B8D2, BDI_B8D4: return 8;
      BDI_B4D1, BDI_B4D2:           return 4;
      BDI_B2D1:                     return 2;
      default:                      return 8;
    endcase
  endfunction

  function automatic int unsigned bdi_delta_bytes(bdi_enc_e e);
    case (e)
      BDI_B8D1, BDI_B4D1, BDI_B2D1: return 1;
      BDI_B8D2, BDI_B4D2:           return 2;
      BDI_B8D4:                     return 4;
      default:                      return 1;
    endcase
  endfunction

  // Compressed size in bits: encoding + base + one mask bit per word + deltas
  function automatic int unsigned bdi_size_bits(bdi_enc_e e);
    int unsigned n;
    case (e)
      BDI_ZEROS: return 4;
      BDI_REP8:  return 4 + 64;
      BDI_NONE:  return LINE_BITS;
      default: begin
        n = 64 / bdi_base_bytes(e);
        return 4 + 8*bdi_base_bytes(e) + n + n*8*bdi_delta_bytes(e);
      end
    endcase
  endfunction

  // ---------------- SEC-DED (72,64) extended Hamming ----------------
  // Hamming positions 1..71; check bits sit at 1,2,4,...,64, data bits fill
  // the rest in order. Check byte = {overall parity, h6..h0}.
  function automatic int unsigned secded_pos(int unsigned j);
    int unsigned pos, cnt;
    pos = 0;
    cnt = 0;
    for (int unsigned p = 1; p < 72; p++) begin
      if ((p & (p - 1)) != 0) begin
        if (cnt == j) pos = p;
        cnt++;
      end
    end
    return pos;
  endfunction

  function automatic logic [64*7-1:0] secded_pos_table();
    logic [64*7-1:0] t;
    for (int unsigned j = 0; j < 64; j++) t[j*7 +: 7] = 7'(secded_pos(j));
    return t;
  endfunction

  localparam logic [64*7-1:0] SECDED_POS = secded_pos_table();

  function automatic logic [6:0] secded_p(int unsigned j);
    return SECDED_POS[j*7 +: 7];
  endfunction

  function automatic logic [7:0] secded_check(logic [63:0] d);
    logic [6:0] h;
    h = '0;
    for (int unsigned j = 0; j < 64; j++)
      if (d[j]) h ^= secded_p(j);
    return {(^d) ^ (^h), h};
  endfunction

  // ---------------- Cache controller ----------------
  typedef enum logic {OP_READ = 1'b0, OP_WB = 1'b1} llc_op_e;

  // One-cycle pulses for each mechanism of the design
  typedef struct packed {
    logic wb_compressed;      // write-back stored as BDI + TEC-QED
    logic wb_uncompressed;    // write-back stored raw + SEC-DED
    logic rd_hit_comp;        // L1 read of a compressed (dirty) block
    logic rd_hit_plain;       // L1 read of a clean or uncompressed block
    logic rd_miss;            // L1 read missed, block fetched from memory
    logic evict_dirty_comp;   // dirty compressed victim written to memory
    logic evict_dirty_plain;  // dirty uncompressed victim written to memory
    logic evict_clean;        // clean victim dropped
    logic clean_refetch;      // clean block with uncorrectable error re-fetched
    logic secded_corrected;   // SEC-DED corrected an error
    logic tecqed_corrected;   // TEC-QED corrected one to three errors
    logic uncorrectable;      // dirty data lost (error beyond the code)
  } llc_events_t;

endpackage
