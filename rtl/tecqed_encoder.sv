// tecqed_encoder: strong-ECC (TEC-QED) encoder for compressed blocks.
//
// A compressed block leaves enough of its 512-bit line free to hold the check
// bits of a code that corrects three and detects four errors. This encoder
// takes the 484-bit compressed payload and returns the full 512-bit line: an
// extended systematic BCH(511,484) codeword (layout in rtm_llc_pkg).
//
// The check bits are the remainder of m(x)*x^27 divided by g(x), computed by a
// bit-serial LFSR unrolled over the message. The paper gives a three-cycle
// latency, so the division is split across three pipeline stages of about 161
// message bits each; the last stage also adds the overall parity bit. A new
// payload can enter every cycle; out_valid follows in_valid three cycles
// later. The write path raises in_valid only for compressible blocks, which
// is the enable drawn on this unit in the architecture figure. The BCH construction is this design's choice of TEC-QED code.
module tecqed_encoder
  import rtm_llc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  payload_t in_payload,
  output logic     out_valid,
  output line_t    out_line
);

  localparam int unsigned C1 = 161;             // message bits in stage 1
  localparam int unsigned C2 = 161;             // stage 2
  localparam int unsigned C3 = BCH_K - C1 - C2; // stage 3 (162)

  // Shift n message bits (MSB first) into the remainder register
  function automatic logic [BCH_R-1:0] lfsr_step(logic [BCH_R-1:0] rem,
                                                 logic [C3-1:0] bits,
                                                 int unsigned n);
    logic fb;
    for (int i = int'(n) - 1; i >= 0; i--) begin
      fb  = bits[i] ^ rem[BCH_R-1];
      rem = rem << 1;
      if (fb) rem ^= BCH_G[BCH_R-1:0];
    end
    return rem;
  endfunction

  logic             v1, v2;
  payload_t         m1, m2;
  logic [BCH_R-1:0] r1, r2, r3;

  assign r3 = lfsr_step(r2, m2[C3-1:0], C3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      m1 <= '0; m2 <= '0; r1 <= '0; r2 <= '0; out_line <= '0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      out_valid <= v2;
      if (in_valid) begin
        m1 <= in_payload;
        r1 <= lfsr_step('0, C3'(in_payload[BCH_K-1 -: C1]), C1);
      end
      if (v1) begin
        m2 <= m1;
        r2 <= lfsr_step(r1, C3'(m1[BCH_K-C1-1 -: C2]), C2);
      end
      if (v2) out_line <= {(^m2) ^ (^r3), m2, r3};
    end
  end

endmodule
