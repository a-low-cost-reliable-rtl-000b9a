// secded_decoder: SEC-DED check and correction of one 64-byte cache block.
//
// Used for clean blocks and for dirty blocks that were not compressed. Each of
// the eight 64-bit words is decoded with its extended Hamming (72,64) check
// byte: the 7-bit syndrome is the XOR of the Hamming positions of all set bits
// (data and check), the eighth bit is overall parity.
//   syndrome 0, parity ok       : no error
//   parity wrong                : single error, flipped back (it may sit in a
//                                 check bit, then data is already right)
//   syndrome != 0, parity ok    : double error, detected, not corrected
// out_corrected flags that at least one word was corrected, out_uncorrectable
// that at least one word had a double (or wrong-position) error.
// Latency one cycle, as the paper gives for SEC-DED; word size is this
// design's choice.
module secded_decoder
  import rtm_llc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  line_t  in_data,
  input  check_t in_check,
  output logic   out_valid,
  output line_t  out_data,
  output logic   out_corrected,
  output logic   out_uncorrectable
);

  line_t data_d;
  logic  corr_d, ue_d;

  always_comb begin
    logic [63:0] d;
    logic [7:0]  c;
    logic [6:0]  syn;
    logic        par;
    data_d = in_data;
    corr_d = 1'b0;
    ue_d   = 1'b0;
    for (int w = 0; w < NWORDS; w++) begin
      d   = in_data[w*WORD_BITS +: WORD_BITS];
      c   = in_check[w*SECDED_CB +: SECDED_CB];
      syn = c[6:0];
      for (int unsigned j = 0; j < 64; j++)
        if (d[j]) syn ^= secded_p(j);
      par = (^d) ^ (^c);
      if (par) begin
        corr_d = 1'b1;
        if (syn > 7'd71) ue_d = 1'b1;
        for (int unsigned j = 0; j < 64; j++)
          if (syn == secded_p(j)) d[j] = ~d[j];
      end else if (syn != 7'd0) begin
        ue_d = 1'b1;
      end
      data_d[w*WORD_BITS +: WORD_BITS] = d;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid         <= 1'b0;
      out_data          <= '0;
      out_corrected     <= 1'b0;
      out_uncorrectable <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data          <= data_d;
        out_corrected     <= corr_d & ~ue_d;
        out_uncorrectable <= ue_d;
      end
    end
  end

endmodule
