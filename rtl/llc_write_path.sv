// llc_write_path: encodes a dirty block written back from L1 for storage.
//
// This is the write side of the architecture: the block goes to the BDI
// compressor and, in parallel, to the SEC-DED encoder. If the compressor says
// the block is compressible, its payload is enabled into the TEC-QED encoder
// and the stored line is that codeword (comp = 1, the SEC-DED side field is
// written as zero and is not used). Otherwise the raw block is stored with its
// SEC-DED check bits (comp = 0). A multiplexer selected by the compressor's
// decision picks the line, as in the paper's figure.
//
// Timing: compression 2 cycles + TEC-QED encoding 3 cycles, so out_valid
// follows in_valid by 5 cycles for every block; the SEC-DED result is delayed
// to line up. The fixed latency is this design's choice (the paper notes the
// write-back path is off the critical path). One block per cycle.
module llc_write_path
  import rtm_llc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  line_t  in_data,
  output logic   out_valid,
  output line_t  out_line,
  output check_t out_check,
  output logic   out_comp
);

  localparam int unsigned LAT = 5;

  logic     c_valid, c_compressible;
  bdi_enc_e c_enc;
  payload_t c_payload;
  logic [9:0] c_size;

  bdi_compressor u_comp (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_data  (in_data),
    .out_valid(c_valid),
    .out_compressible(c_compressible),
    .out_enc  (c_enc),
    .out_payload(c_payload),
    .out_size_bits(c_size)
  );

  logic  t_valid;
  line_t t_line;

  tecqed_encoder u_tenc (
    .clk, .rst_n,
    .in_valid  (c_valid & c_compressible),
    .in_payload(c_payload),
    .out_valid (t_valid),
    .out_line  (t_line)
  );

  logic   s_valid;
  check_t s_check;

  secded_encoder u_senc (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_data  (in_data),
    .out_valid(s_valid),
    .out_check(s_check)
  );

  // Delay lines: raw data for LAT cycles, SEC-DED bits for LAT-1 cycles,
  // the compress decision for the 3 TEC-QED cycles.
  line_t  raw_q   [LAT];
  logic   vld_q   [LAT];
  check_t chk_q   [LAT-1];
  logic   cmp_q   [3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        raw_q[i] <= '0;
        vld_q[i] <= 1'b0;
      end
      for (int i = 0; i < LAT-1; i++) chk_q[i] <= '0;
      for (int i = 0; i < 3; i++) cmp_q[i] <= 1'b0;
    end else begin
      raw_q[0] <= in_data;
      vld_q[0] <= in_valid;
      for (int i = 1; i < LAT; i++) begin
        raw_q[i] <= raw_q[i-1];
        vld_q[i] <= vld_q[i-1];
      end
      chk_q[0] <= s_check;
      for (int i = 1; i < LAT-1; i++) chk_q[i] <= chk_q[i-1];
      cmp_q[0] <= c_valid & c_compressible;
      for (int i = 1; i < 3; i++) cmp_q[i] <= cmp_q[i-1];
    end
  end

  // Output multiplexer, selected by the (delayed) Compressible? decision
  always_comb begin
    out_valid = vld_q[LAT-1];
    out_comp  = cmp_q[2];
    if (cmp_q[2] && t_valid) begin
      out_line  = t_line;
      out_check = '0;
    end else begin
      out_line  = raw_q[LAT-1];
      out_check = chk_q[LAT-2];
    end
  end

  // s_valid and the encoding/size outputs are kept for observation only
  logic unused;
  assign unused = s_valid ^ (^c_enc) ^ (^c_size);

endmodule
