// secded_encoder: SEC-DED check bits for one 64-byte cache block.
//
// Every block of the cache, clean or dirty, compressed or not, has SEC-DED
// protection kept in a small side store; this unit computes it. The block is
// split into eight 64-bit words and each gets the 8 check bits of an extended
// Hamming (72,64) code (seven Hamming bits plus overall parity, see
// rtm_llc_pkg::secded_check). The paper gives the one-cycle latency; the
// (72,64) word size is this design's choice.
//
// Interface: in_valid/in_data are sampled on a rising clock edge; out_valid and
// out_check appear one cycle later (latency 1, one block per cycle).
module secded_encoder
  import rtm_llc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  line_t  in_data,
  output logic   out_valid,
  output check_t out_check
);

  check_t check_d;

  always_comb begin
    for (int w = 0; w < NWORDS; w++)
      check_d[w*SECDED_CB +: SECDED_CB] = secded_check(in_data[w*WORD_BITS +: WORD_BITS]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_check <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_check <= check_d;
    end
  end

endmodule
