// bdi_compressor: Base-Delta-Immediate compression of a 64-byte block.
//
// Only dirty blocks written back from L1 are offered for compression. BDI
// views the block as 64/B words of B bytes and stores one B-byte base plus a
// D-byte signed delta per word; a word may instead be stored as a D-byte
// signed immediate (delta from an implicit zero base), chosen by one mask bit
// per word. Eight encodings are tried in parallel: all-zero, one repeated
// 8-byte value, and (B,D) = (8,1) (4,1) (8,2) (2,1) (4,2) (8,4). The base is
// the block's first word. The smallest encoding that works is kept, in the
// fixed payload layout of rtm_llc_pkg.
//
// out_compressible is the "Compressible?" decision: the block is compressed
// only if its compressed size plus the TEC-QED check bits fit in the line.
// Timing: two pipeline stages, the paper's two-cycle compression latency.
// Stage 1 tries all encodings, stage 2 picks the smallest and packs it. One
// block can enter every cycle. The paper adopts BDI; the base choice, the
// encoding list and the payload layout are this design's.
module bdi_compressor
  import rtm_llc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  line_t    in_data,
  output logic     out_valid,
  output logic     out_compressible,
  output bdi_enc_e out_enc,
  output payload_t out_payload,
  output logic [9:0] out_size_bits
);

  localparam int unsigned NTRY = 6;  // base+delta encodings
  localparam bdi_enc_e TRY_ENC [NTRY] = '{BDI_B8D1, BDI_B4D1, BDI_B8D2,
                                          BDI_B2D1, BDI_B4D2, BDI_B8D4};

  // Try one base+delta encoding. Returns success; fills deltas and mask.
  function automatic logic bdi_try(line_t line, int unsigned bb, int unsigned db,
                                   output logic [255:0] deltas,
                                   output logic [31:0]  mask);
    logic [63:0] wm, dm, base, w, d, lo, sx;
    logic        ok, fit_b, fit_z;
    int unsigned n;
    n      = 64 / bb;
    wm     = (bb == 8) ? '1 : ((64'd1 << (8*bb)) - 64'd1);
    dm     = (64'd1 << (8*db)) - 64'd1;
    base   = 64'(line[63:0]) & wm;
    deltas = '0;
    mask   = '0;
    ok     = 1'b1;
    // fixed trip count (at most 32 words) so the loop unrolls statically
    for (int unsigned i = 0; i < 32; i++) begin
      if (i < n) begin
        w  = 64'(line >> (i*8*bb)) & wm;
        // delta from the base
        d  = (w - base) & wm;
        lo = d & dm;
        sx = (lo[8*db-1] ? (lo | ~dm) : lo) & wm;
        fit_b = (sx == d);
        // immediate (delta from zero)
        lo = w & dm;
        sx = (lo[8*db-1] ? (lo | ~dm) : lo) & wm;
        fit_z = (sx == w);
        if (!fit_b && !fit_z) ok = 1'b0;
        mask[i] = !fit_b && fit_z;
        lo      = fit_b ? (d & dm) : (w & dm);
        deltas |= 256'(lo) << (i*8*db);
      end
    end
    return ok;
  endfunction

  // ---------------- stage 1: try all encodings ----------------
  logic              v1;
  logic [63:0]       data1;   // first word: base / repeated value
  logic              zero1, rep1;
  logic [NTRY-1:0]   ok1;
  logic [255:0]      deltas1 [NTRY];
  logic [31:0]       mask1   [NTRY];

  logic [NTRY-1:0]   ok_d;
  logic [255:0]      deltas_d [NTRY];
  logic [31:0]       mask_d   [NTRY];
  logic              rep_d;

  always_comb begin
    for (int k = 0; k < NTRY; k++)
      ok_d[k] = bdi_try(in_data, bdi_base_bytes(TRY_ENC[k]),
                        bdi_delta_bytes(TRY_ENC[k]), deltas_d[k], mask_d[k]);
    rep_d = 1'b1;
    for (int i = 1; i < 8; i++)
      if (in_data[i*64 +: 64] != in_data[63:0]) rep_d = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; data1 <= '0; zero1 <= 1'b0; rep1 <= 1'b0; ok1 <= '0;
      for (int k = 0; k < NTRY; k++) begin
        deltas1[k] <= '0;
        mask1[k]   <= '0;
      end
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        data1 <= in_data[63:0];
        zero1 <= (in_data == '0);
        rep1  <= rep_d;
        ok1   <= ok_d;
        for (int k = 0; k < NTRY; k++) begin
          deltas1[k] <= deltas_d[k];
          mask1[k]   <= mask_d[k];
        end
      end
    end
  end

  // ---------------- stage 2: pick the smallest and pack ----------------
  bdi_enc_e  enc_d;
  payload_t  pl_d;
  logic [9:0] size_d;

  always_comb begin
    int sel;
    enc_d = BDI_NONE;
    pl_d  = '0;
    sel   = -1;
    // TRY_ENC is ordered by size, so the first success is the smallest
    for (int k = NTRY - 1; k >= 0; k--)
      if (ok1[k]) sel = k;
    if (zero1) begin
      enc_d = BDI_ZEROS;
    end else if (rep1) begin
      enc_d = BDI_REP8;
      pl_d[PL_BASE_LSB +: 64] = data1[63:0];
    end else if (sel >= 0) begin
      enc_d = TRY_ENC[sel];
      pl_d[PL_BASE_LSB +: 64]   = data1[63:0] &
                                  ((bdi_base_bytes(TRY_ENC[sel]) == 8) ? '1 :
                                   ((64'd1 << (8*bdi_base_bytes(TRY_ENC[sel]))) - 64'd1));
      pl_d[PL_MASK_LSB +: 32]   = mask1[sel];
      pl_d[PL_DELTA_LSB +: 256] = deltas1[sel];
    end
    pl_d[PL_ENC_LSB +: 4] = enc_d;
    size_d = 10'(bdi_size_bits(enc_d));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_compressible <= 1'b0; out_enc <= BDI_NONE;
      out_payload <= '0; out_size_bits <= '0;
    end else begin
      out_valid <= v1;
      if (v1) begin
        out_compressible <= (enc_d != BDI_NONE) &&
                            (32'(size_d) + TQ_CHECK <= LINE_BITS);
        out_enc          <= enc_d;
        out_payload      <= pl_d;
        out_size_bits    <= size_d;
      end
    end
  end

endmodule
