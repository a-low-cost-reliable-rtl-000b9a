// tb_ref_pkg: reference models used by the testbenches, written apart from
// the RTL so that the testbenches compare against an independent computation.
//   - GF(2^9) arithmetic with p(x) = x^9 + x^4 + 1 and BCH syndromes
//   - systematic BCH(511,484) encoding by polynomial long division
//   - extended Hamming (72,64) check bits built from the full codeword
//   - BDI classification, packing and unpacking
//   - random block generators for each BDI class
package tb_ref_pkg;

  typedef logic [511:0] blk_t;

  function automatic logic [8:0] r_mul(logic [8:0] a, logic [8:0] b);
    logic [8:0] r;
    r = '0;
    for (int i = 8; i >= 0; i--) begin
      // r = r * x
      r = {r[7:0], 1'b0} ^ (r[8] ? 9'h011 : 9'h000);
      if (b[i]) r ^= a;
    end
    return r;
  endfunction

  function automatic logic [8:0] r_pow(int unsigned e);
    logic [8:0] r, b;
    r = 9'd1;
    b = 9'd2;
    e = e % 511;
    while (e != 0) begin
      if (e[0]) r = r_mul(r, b);
      b = r_mul(b, b);
      e = e >> 1;
    end
    return r;
  endfunction

  // syndrome S_j of the 511-bit part of a line
  function automatic logic [8:0] r_syn(blk_t cw, int unsigned j);
    logic [8:0] s;
    s = '0;
    for (int unsigned i = 0; i < 511; i++)
      if (cw[i]) s ^= r_pow(i * j);
    return s;
  endfunction

  // systematic extended BCH encoding of a 484-bit message
  function automatic blk_t r_bch_encode(logic [483:0] msg);
    logic [510:0] poly;
    logic [27:0]  g;
    blk_t cw;
    g = 28'hD612B79;
    poly = {msg, 27'b0};
    for (int i = 510; i >= 27; i--)
      if (poly[i]) poly[i -: 28] = poly[i -: 28] ^ g;
    cw = {1'b0, msg, poly[26:0]};
    cw[511] = ^cw[510:0];
    return cw;
  endfunction

  // extended Hamming (72,64): build positions 1..71, then the check byte
  function automatic logic [7:0] r_secded(logic [63:0] d);
    logic [71:0] cw;
    int unsigned j;
    logic [7:0] c;
    cw = '0;
    j = 0;
    for (int unsigned p = 1; p < 72; p++)
      if (p != 1 && p != 2 && p != 4 && p != 8 && p != 16 && p != 32 && p != 64) begin
        cw[p] = d[j];
        j++;
      end
    c = '0;
    for (int k = 0; k < 7; k++)
      for (int unsigned p = 1; p < 72; p++)
        if (((p >> k) & 1) == 1 && cw[p]) c[k] = ~c[k];
    c[7] = (^d) ^ (^c[6:0]);
    return c;
  endfunction

  function automatic logic [63:0] r_secded_line(blk_t b);
    logic [63:0] c;
    for (int w = 0; w < 8; w++) c[w*8 +: 8] = r_secded(b[w*64 +: 64]);
    return c;
  endfunction

  function automatic blk_t r_rand_blk();
    blk_t b;
    for (int i = 0; i < 16; i++) b[i*32 +: 32] = $urandom;
    return b;
  endfunction

  // ---------------- BDI ----------------
  // encodings in the order of their compressed size
  localparam int unsigned NENC = 6;
  localparam int unsigned ENC_CODE [NENC] = '{2, 3, 4, 5, 6, 7};
  localparam int unsigned ENC_BB   [NENC] = '{8, 4, 8, 2, 4, 8};
  localparam int unsigned ENC_DB   [NENC] = '{1, 1, 2, 1, 2, 4};

  // value of word i (bb bytes) as a signed number, and whether v fits db bytes
  function automatic longint r_word_s(blk_t b, int unsigned bb, int unsigned i);
    longint v;
    v = 0;
    for (int unsigned k = 0; k < bb; k++) v |= longint'(b[(i*bb + k)*8 +: 8]) << (8*k);
    if (bb < 8 && v[8*bb-1]) v = v - (longint'(1) << (8*bb));
    return v;
  endfunction

  function automatic bit r_fits(longint v, int unsigned bytes);
    longint lim;
    if (bytes >= 8) return 1;
    lim = longint'(1) << (8*bytes - 1);
    return (v >= -lim) && (v < lim);
  endfunction

  // wrap a difference into the signed range of bb bytes
  function automatic longint r_wrap(longint v, int unsigned bb);
    longint m;
    if (bb == 8) return v;
    m = longint'(1) << (8*bb);
    v = v % m;
    if (v >= m/2) v -= m;
    if (v < -(m/2)) v += m;
    return v;
  endfunction

  // Returns expected encoding code (15 = none) and the payload
  function automatic int unsigned r_bdi(blk_t b, output logic [483:0] pl);
    bit ok, rep;
    longint base, w, d;
    int unsigned n, bb, db;
    pl = '0;
    if (b == '0) begin
      pl[3:0] = 4'd0;
      return 0;
    end
    rep = 1;
    for (int i = 1; i < 8; i++) if (b[i*64 +: 64] != b[63:0]) rep = 0;
    if (rep) begin
      pl[3:0] = 4'd1;
      pl[67:4] = b[63:0];
      return 1;
    end
    for (int e = 0; e < NENC; e++) begin
      bb = ENC_BB[e];
      db = ENC_DB[e];
      n  = 64 / bb;
      base = r_word_s(b, bb, 0);
      ok = 1;
      pl = '0;
      for (int unsigned i = 0; i < n; i++) begin
        w = r_word_s(b, bb, i);
        d = r_wrap(w - base, bb);
        if (r_fits(d, db)) begin
          for (int unsigned k = 0; k < 8*db; k++) pl[100 + i*8*db + k] = d[k];
        end else if (r_fits(w, db)) begin
          pl[68 + i] = 1'b1;
          for (int unsigned k = 0; k < 8*db; k++) pl[100 + i*8*db + k] = w[k];
        end else ok = 0;
      end
      if (ok) begin
        pl[3:0] = 4'(ENC_CODE[e]);
        for (int unsigned k = 0; k < 8*bb; k++) pl[4 + k] = base[k];
        return ENC_CODE[e];
      end
    end
    pl = '0;
    pl[3:0] = 4'd15;
    return 15;
  endfunction

  function automatic int unsigned r_bdi_size(int unsigned code);
    if (code == 0) return 4;
    if (code == 1) return 68;
    for (int e = 0; e < NENC; e++)
      if (ENC_CODE[e] == code)
        return 4 + 8*ENC_BB[e] + 64/ENC_BB[e] + (64/ENC_BB[e])*8*ENC_DB[e];
    return 512;
  endfunction

  // Make a block of a given class: 0 zeros, 1 repeated, 2..7 base+delta
  // with (bb,db) of that code, 15 random.
  function automatic blk_t r_make(int unsigned code);
    blk_t b;
    int unsigned bb, db, n;
    logic [63:0] base, dl, w;
    b = '0;
    case (code)
      0: b = '0;
      1: begin
        base = {$urandom, $urandom};
        b = {8{base}};
      end
      15: b = r_rand_blk();
      default: begin
        bb = 8; db = 1;
        for (int e = 0; e < NENC; e++)
          if (ENC_CODE[e] == code) begin bb = ENC_BB[e]; db = ENC_DB[e]; end
        n = 64 / bb;
        base = {$urandom, $urandom};
        // a big base so that words are not immediates by chance
        base[8*bb-1 -: 2] = 2'b01;
        for (int unsigned i = 0; i < n; i++) begin
          dl = {$urandom, $urandom};
          if (db < 8) begin
            dl = dl & ((64'd1 << (8*db)) - 1);
            if (dl[8*db-1]) dl = dl | ~((64'd1 << (8*db)) - 1);
          end
          if (i != 0 && ($urandom % 5) == 0) w = dl;        // immediate
          else if (i == 0) w = base;
          else w = base + dl;
          for (int unsigned k = 0; k < 8*bb; k++) b[i*8*bb + k] = w[k];
        end
        // one word needs the full delta width so the smaller encodings fail
        if (db > 1 && n > 1) begin
          w = base + (64'd1 << (8*db - 2));
          for (int unsigned k = 0; k < 8*bb; k++) b[8*bb + k] = w[k];
        end
      end
    endcase
    return b;
  endfunction

endpackage
