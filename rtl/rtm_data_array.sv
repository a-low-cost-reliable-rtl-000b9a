// rtm_data_array: data store of the racetrack (RTM) LLC with its SEC-DED side
// store.
//
// Each entry holds a 512-bit line (raw block, or a TEC-QED codeword of a
// compressed block) and 64 SEC-DED check bits in the small extra storage that
// protects every block. It is modelled as a synchronous memory: rd_data is
// valid one cycle after rd_en. The racetrack device itself (nanowires, access
// ports, shift drivers) and its shift latency are not modelled; the paper
// describes them as background and gives no organisation or timing.
//
// inj_en/inj_idx/inj_mask flip bits of a stored entry in place. They model the
// position (shift) and MTJ errors of the racetrack cells for testing the error
// handling, and are this design's addition. A write on the same cycle wins.
module rtm_data_array
  import rtm_llc_pkg::*;
#(
  parameter int unsigned ENTRIES = 32768,   // 2048 sets x 16 ways
  parameter int unsigned IDX_W   = $clog2(ENTRIES)
) (
  input  logic                            clk,
  input  logic                            rd_en,
  input  logic [IDX_W-1:0]                rd_idx,
  output logic [LINE_BITS+CHECK_BITS-1:0] rd_data,
  input  logic                            wr_en,
  input  logic [IDX_W-1:0]                wr_idx,
  input  logic [LINE_BITS+CHECK_BITS-1:0] wr_data,
  input  logic                            inj_en,
  input  logic [IDX_W-1:0]                inj_idx,
  input  logic [LINE_BITS+CHECK_BITS-1:0] inj_mask
);

  logic [LINE_BITS+CHECK_BITS-1:0] mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en)       mem[wr_idx]  <= wr_data;
    else if (inj_en) mem[inj_idx] <= mem[inj_idx] ^ inj_mask;
    if (rd_en) rd_data <= mem[rd_idx];
  end

endmodule
