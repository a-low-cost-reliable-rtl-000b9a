// tecqed_decoder: strong-ECC (TEC-QED) decoder for compressed blocks.
//
// Decodes the extended BCH(511,484) codeword that a compressed block occupies
// (layout in rtm_llc_pkg): up to three bit errors anywhere in the 512-bit line
// are corrected, four are detected. Three pipeline stages give the paper's
// three-cycle latency:
//   1. syndromes S1, S3, S5 of bits [510:0] (S_j = sum of alpha^(i*j) over set
//      bits i) and the overall parity of all 512 bits;
//   2. error-locator polynomial sigma(x) = 1 + s1 x + s2 x^2 + s3 x^3 by
//      Peterson's closed form for binary codes:
//        D = S1^3 + S3;  D != 0: s1 = S1, s2 = (S1^2 S3 + S5)/D, s3 = D + S1 s2
//        D == 0, S1 != 0: one error, sigma = 1 + S1 x (needs S5 = S1^5)
//        D == 0, S1 == 0, S5 != 0: more errors than can be located;
//   3. Chien search: bit i is in error when sigma(alpha^-i) = 0. The block is
//      uncorrectable when the number of roots differs from the degree of
//      sigma, or when the error count, including a wrong overall-parity bit,
//      exceeds three (this is what detects four errors).
// out_payload is the corrected 484-bit message. out_corrected means one to
// three errors were fixed; out_uncorrectable means the payload is not to be
// trusted. One block can enter every cycle. The code choice (BCH) and the
// stage split are this design's own.
module tecqed_decoder
  import rtm_llc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  line_t    in_line,
  output logic     out_valid,
  output payload_t out_payload,
  output logic     out_corrected,
  output logic     out_uncorrectable
);

  // ---------------- stage 1: syndromes ----------------
  logic  v1;
  logic [GF_N-1:BCH_R] l1;   // message bits; the check bits are not needed after the syndromes
  gf_t   s1_q, s3_q, s5_q;
  logic  par1;

  gf_t s1_d, s3_d, s5_d;
  always_comb begin
    s1_d = '0; s3_d = '0; s5_d = '0;
    for (int unsigned i = 0; i < GF_N; i++) begin
      if (in_line[i]) begin
        s1_d ^= alpha(i);
        s3_d ^= alpha(3*i);
        s5_d ^= alpha(5*i);
      end
    end
  end

  // ---------------- stage 2: error locator ----------------
  logic  v2;
  logic [GF_N-1:BCH_R] l2;
  logic  par2;
  gf_t   sig1_q, sig2_q, sig3_q;
  logic  fail2;

  gf_t  sig1_d, sig2_d, sig3_d;
  logic fail_d;
  always_comb begin
    gf_t s1c, d, num;
    s1c = gf_mul(gf_sq(s1_q), s1_q);
    num = '0;
    d   = s1c ^ s3_q;
    sig1_d = '0; sig2_d = '0; sig3_d = '0; fail_d = 1'b0;
    if (d != '0) begin
      num    = gf_mul(gf_sq(s1_q), s3_q) ^ s5_q;
      sig1_d = s1_q;
      sig2_d = gf_mul(num, gf_inv(d));
      sig3_d = d ^ gf_mul(s1_q, sig2_d);
    end else if (s1_q != '0) begin
      sig1_d = s1_q;
      fail_d = (s5_q != gf_mul(gf_sq(gf_sq(s1_q)), s1_q));
    end else begin
      fail_d = (s5_q != '0);
    end
  end

  // ---------------- stage 3: Chien search and correction ----------------
  logic [GF_N-1:0] err_d;
  logic            fail3_d, corr3_d;
  payload_t        fixed_d;
  // Chien search: one evaluator per bit position, each with constant powers
  // of alpha^-i, so sigma(alpha^-i) is three constant multiplications
  for (genvar i = 0; i < GF_N; i++) begin : g_chien
    localparam gf_t X1 = alpha(GF_N - i);
    localparam gf_t X2 = alpha(2*(GF_N - i));
    localparam gf_t X3 = alpha(3*(GF_N - i));
    always_comb
      err_d[i] = ((9'd1 ^ gf_mul(sig1_q, X1) ^ gf_mul(sig2_q, X2)
                        ^ gf_mul(sig3_q, X3)) == '0);
  end

  always_comb begin
    int unsigned roots, deg, nerr;
    roots = $countones(err_d);
    deg  = (sig3_q != '0) ? 3 : (sig2_q != '0) ? 2 : (sig1_q != '0) ? 1 : 0;
    // a parity mismatch beyond what the located errors explain means the
    // overall-parity bit itself is wrong too
    nerr = deg + ((par2 ^ deg[0]) ? 1 : 0);
    fail3_d = fail2 || (roots != deg) || (nerr > 3);
    corr3_d = !fail3_d && (nerr != 0);
    // bit 511 (overall parity) carries no data and is not corrected
    fixed_d = fail3_d ? l2 : (l2 ^ err_d[GF_N-1:BCH_R]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      l1 <= '0; l2 <= '0; par1 <= 1'b0; par2 <= 1'b0;
      s1_q <= '0; s3_q <= '0; s5_q <= '0;
      sig1_q <= '0; sig2_q <= '0; sig3_q <= '0; fail2 <= 1'b0;
      out_payload <= '0; out_corrected <= 1'b0; out_uncorrectable <= 1'b0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      out_valid <= v2;
      if (in_valid) begin
        l1   <= in_line[GF_N-1:BCH_R];
        par1 <= ^in_line;
        s1_q <= s1_d; s3_q <= s3_d; s5_q <= s5_d;
      end
      if (v1) begin
        l2     <= l1;
        par2   <= par1;
        sig1_q <= sig1_d; sig2_q <= sig2_d; sig3_q <= sig3_d;
        fail2  <= fail_d;
      end
      if (v2) begin
        out_payload       <= fixed_d;
        out_corrected     <= corr3_d;
        out_uncorrectable <= fail3_d;
      end
    end
  end

endmodule
