// llc_decode_path: checks and restores a block read out of the cache.
//
// The architecture has two copies of this path: one between the cache and L1
// (reads by the cores) and one between the cache and main memory (eviction of
// dirty blocks). The block's compressed bit from the tag ("comp. signal")
// steers it:
//   comp = 0 (clean, or dirty but incompressible): SEC-DED decoder, 1 cycle;
//   comp = 1 (compressed dirty): TEC-QED decoder, 3 cycles, then the BDI
//            decompressor, 1 cycle, 4 cycles in all.
// The comp signal enables only the units a block needs and selects the output
// multiplexer. out_corrected reports a corrected error, out_uncorrectable an
// error beyond the code (or a payload that does not decode). One block at a
// time may be in flight in this design's controller; the latencies are the
// paper's.
module llc_decode_path
  import rtm_llc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic   in_comp,
  input  line_t  in_line,
  input  check_t in_check,
  output logic   out_valid,
  output logic   out_comp,
  output line_t  out_data,
  output logic   out_corrected,
  output logic   out_uncorrectable
);

  logic  s_valid, s_corr, s_ue;
  line_t s_data;

  secded_decoder u_sdec (
    .clk, .rst_n,
    .in_valid (in_valid & ~in_comp),
    .in_data  (in_line),
    .in_check (in_check),
    .out_valid(s_valid),
    .out_data (s_data),
    .out_corrected(s_corr),
    .out_uncorrectable(s_ue)
  );

  logic     t_valid, t_corr, t_ue;
  payload_t t_payload;

  tecqed_decoder u_tdec (
    .clk, .rst_n,
    .in_valid (in_valid & in_comp),
    .in_line  (in_line),
    .out_valid(t_valid),
    .out_payload(t_payload),
    .out_corrected(t_corr),
    .out_uncorrectable(t_ue)
  );

  logic  d_valid, d_bad;
  line_t d_data;
  logic  t_corr_q, t_ue_q;

  bdi_decompressor u_dcmp (
    .clk, .rst_n,
    .in_valid  (t_valid),
    .in_payload(t_payload),
    .out_valid (d_valid),
    .out_data  (d_data),
    .out_bad   (d_bad)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_corr_q <= 1'b0;
      t_ue_q   <= 1'b0;
    end else if (t_valid) begin
      t_corr_q <= t_corr;
      t_ue_q   <= t_ue;
    end
  end

  // Output multiplexer selected by which decoder produced the block
  always_comb begin
    out_valid = s_valid | d_valid;
    out_comp  = d_valid;
    if (d_valid) begin
      out_data          = d_data;
      out_corrected     = t_corr_q;
      out_uncorrectable = t_ue_q | d_bad;
    end else begin
      out_data          = s_data;
      out_corrected     = s_corr;
      out_uncorrectable = s_ue;
    end
  end

endmodule
