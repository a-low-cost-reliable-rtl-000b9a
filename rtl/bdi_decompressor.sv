// bdi_decompressor: rebuilds a 64-byte block from its BDI payload.
//
// Reads the encoding from payload bits [3:0] (layout in rtm_llc_pkg). For the
// base+delta encodings word i is rebuilt as base + sext(delta_i) when mask
// bit i is 0, and as sext(delta_i) (an immediate) when it is 1, all modulo the
// B-byte word size. All-zero and repeated-value blocks are expanded directly.
// It is pure combinational logic plus an output register: one-cycle latency,
// as the paper gives for BDI decompression, one block per cycle. Payloads with
// an unknown encoding decode to zero and raise out_bad.
module bdi_decompressor
  import rtm_llc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  payload_t in_payload,
  output logic     out_valid,
  output line_t    out_data,
  output logic     out_bad
);

  line_t data_d;
  logic  bad_d;

  always_comb begin
    bdi_enc_e    enc;
    logic [63:0] base, wm, dm, lo, sx, w;
    logic [31:0] mask;
    logic [255:0] deltas;
    int unsigned bb, db, n;
    enc    = bdi_enc_e'(in_payload[PL_ENC_LSB +: 4]);
    base   = in_payload[PL_BASE_LSB +: 64];
    mask   = in_payload[PL_MASK_LSB +: 32];
    deltas = in_payload[PL_DELTA_LSB +: 256];
    data_d = '0;
    bad_d  = 1'b0;
    bb = 8; db = 1; n = 0;
    wm = '0; dm = '0; lo = '0; sx = '0; w = '0;
    case (enc)
      BDI_ZEROS: data_d = '0;
      BDI_REP8:  data_d = {8{base}};
      BDI_B8D1, BDI_B4D1, BDI_B8D2, BDI_B2D1, BDI_B4D2, BDI_B8D4: begin
        bb = bdi_base_bytes(enc);
        db = bdi_delta_bytes(enc);
        n  = 64 / bb;
        wm = (bb == 8) ? '1 : ((64'd1 << (8*bb)) - 64'd1);
        dm = (64'd1 << (8*db)) - 64'd1;
        // fixed trip count (at most 32 words) so the loop unrolls statically
        for (int unsigned i = 0; i < 32; i++) begin
          if (i < n) begin
            lo = 64'(deltas >> (i*8*db)) & dm;
            sx = lo[8*db-1] ? (lo | ~dm) : lo;
            w  = (mask[i] ? sx : (base + sx)) & wm;
            data_d |= line_t'(w) << (i*8*bb);
          end
        end
      end
      default: bad_d = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_bad   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data <= data_d;
        out_bad  <= bad_d;
      end
    end
  end

endmodule
