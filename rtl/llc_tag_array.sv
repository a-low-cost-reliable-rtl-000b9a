// llc_tag_array: tags and per-block state of the set-associative LLC.
//
// Each block has a tag, a valid bit, a dirty bit and the one extra bit this
// design adds to the tag: comp, set when the block is stored compressed under
// TEC-QED. A read returns all WAYS entries of a set one cycle after rd_en
// (synchronous read, as for an SRAM tag macro). A write updates one way.
// Each set also has a round-robin victim pointer, advanced by rr_adv; the
// replacement policy is not given by the paper and round-robin is this
// design's simplest choice.
//
// After reset the array clears every set, one per cycle; init_done rises when
// the sweep is over and no access may be made before. Defaults are the paper's
// 2 MB, 16-way cache of 64-byte blocks: 2048 sets.
module llc_tag_array
  import rtm_llc_pkg::*;
#(
  parameter int unsigned SETS  = 2048,
  parameter int unsigned WAYS  = 16,
  parameter int unsigned TAG_W = LADDR_W - $clog2(SETS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic                      init_done,
  input  logic                      rd_en,
  input  logic [$clog2(SETS)-1:0]   rd_set,
  output logic [WAYS-1:0]           rd_valid,
  output logic [WAYS-1:0]           rd_dirty,
  output logic [WAYS-1:0]           rd_comp,
  output logic [WAYS-1:0][TAG_W-1:0] rd_tag,
  output logic [$clog2(WAYS)-1:0]   rd_rr,
  input  logic                      wr_en,
  input  logic [$clog2(SETS)-1:0]   wr_set,
  input  logic [$clog2(WAYS)-1:0]   wr_way,
  input  logic                      wr_valid,
  input  logic                      wr_dirty,
  input  logic                      wr_comp,
  input  logic [TAG_W-1:0]          wr_tag,
  input  logic                      rr_adv
);

  localparam int unsigned SW = $clog2(SETS);
  localparam int unsigned WW = $clog2(WAYS);

  typedef struct packed {
    logic             valid;
    logic             dirty;
    logic             comp;
    logic [TAG_W-1:0] tag;
  } entry_t;

  entry_t        mem [SETS][WAYS];
  logic [WW-1:0] rr  [SETS];

  logic          init_busy;
  logic [SW-1:0] init_set;

  assign init_done = !init_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_set  <= '0;
    end else if (init_busy) begin
      init_set <= init_set + 1'b1;
      if (init_set == SW'(SETS - 1)) init_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (init_busy) begin
      for (int w = 0; w < WAYS; w++) mem[init_set][w] <= '0;
      rr[init_set] <= '0;
    end else begin
      if (wr_en) mem[wr_set][wr_way] <= '{valid: wr_valid, dirty: wr_dirty,
                                          comp: wr_comp, tag: wr_tag};
      if (rr_adv) rr[wr_set] <= rr[wr_set] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int w = 0; w < WAYS; w++) begin
        rd_valid[w] <= mem[rd_set][w].valid;
        rd_dirty[w] <= mem[rd_set][w].dirty;
        rd_comp[w]  <= mem[rd_set][w].comp;
        rd_tag[w]   <= mem[rd_set][w].tag;
      end
      rd_rr <= rr[rd_set];
    end
  end

endmodule
