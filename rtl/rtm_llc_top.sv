// rtm_llc_top: reliable racetrack last-level cache with compression-based
// strong ECC.
//
// A shared LLC (default 2 MB, 16 ways, 64-byte blocks) whose every block has
// SEC-DED check bits in a small side store, and whose dirty blocks are, when
// BDI can compress them, stored as a TEC-QED codeword that corrects three and
// detects four bit errors inside the block's own line. Clean blocks need no
// strong code: a clean block whose error SEC-DED cannot correct is invalidated
// and fetched again from memory.
//
// The controller FSM in this module serves one request at a time:
//   L1 write-back (req_op = OP_WB): look up; on a miss choose a victim (first
//     invalid way, else the set's round-robin way), write a dirty victim back
//     to memory; then run the write path (compress 2 + TEC-QED 3 cycles, or
//     SEC-DED) and store the line dirty with its comp bit; answer resp_valid.
//   L1 read (OP_READ): on a hit read the line, decode it on the upper decode
//     path (SEC-DED 1 cycle, or TEC-QED 3 + decompress 1 for a compressed
//     block) and return it. On a miss evict as above, fetch the block from
//     memory, SEC-DED encode it (fill encoder), store it clean and
//     uncompressed and return it. An uncorrectable error in a clean block
//     starts this refetch; in a dirty block it is reported with resp_err.
//   Dirty victims are decoded on the lower (memory-side) decode path, so a
//     compressed block is decompressed before it goes to memory.
// Memory side: mem_req_valid/mem_req_ready handshake, mem_req_we = 1 for a
// write; read data returns on mem_rsp_valid, any number of cycles later.
// inj_* flips bits of a stored line to emulate racetrack errors; ev pulses one
// bit per mechanism for counting. The single outstanding request, the
// handshakes, round-robin replacement and write-allocate of write-back misses
// are this design's choices; the data flows and latencies follow the paper.
module rtm_llc_top
  import rtm_llc_pkg::*;
#(
  parameter int unsigned SETS = 2048,
  parameter int unsigned WAYS = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // L1 side
  input  logic                     req_valid,
  output logic                     req_ready,
  input  llc_op_e                  req_op,
  input  laddr_t                   req_laddr,
  input  line_t                    req_wdata,
  output logic                     resp_valid,
  output llc_op_e                  resp_op,
  output line_t                    resp_data,
  output logic                     resp_err,
  // main-memory side
  output logic                     mem_req_valid,
  input  logic                     mem_req_ready,
  output logic                     mem_req_we,
  output laddr_t                   mem_req_laddr,
  output line_t                    mem_req_wdata,
  input  logic                     mem_rsp_valid,
  input  line_t                    mem_rsp_data,
  // error injection into the RTM array
  input  logic                     inj_en,
  input  logic [$clog2(SETS)-1:0]  inj_set,
  input  logic [$clog2(WAYS)-1:0]  inj_way,
  input  logic [LINE_BITS+CHECK_BITS-1:0] inj_mask,
  // event pulses
  output llc_events_t              ev
);

  localparam int unsigned SW    = $clog2(SETS);
  localparam int unsigned WW    = $clog2(WAYS);
  localparam int unsigned TAG_W = LADDR_W - SW;
  localparam int unsigned IDX_W = SW + WW;

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_TAG, S_DRD, S_DEC, S_EVRD, S_EVDEC, S_EVWR,
    S_MREQ, S_MRSP, S_FILL, S_WP
  } state_e;

  state_e state;

  // ---------------- request registers ----------------
  llc_op_e          op_q;
  logic [SW-1:0]    set_q;
  logic [TAG_W-1:0] tag_q;
  logic [WW-1:0]    way_q;
  line_t            wdata_q, fill_q, ev_data_q;
  logic             cur_dirty_q, cur_comp_q, use_rr_q;
  logic [TAG_W-1:0] v_tag_q;
  logic             v_comp_q;
  logic [WW-1:0]    sel_way;

  // ---------------- sub-blocks ----------------
  logic                  tag_init_done, tag_rd_en, tag_wr_en;
  logic [SW-1:0]         tag_rd_set;
  logic [WAYS-1:0]       t_valid, t_dirty, t_comp;
  logic [WAYS-1:0][TAG_W-1:0] t_tag;
  logic [WW-1:0]         t_rr;
  logic                  tw_valid, tw_dirty, tw_comp, rr_adv;

  llc_tag_array #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TAG_W)) u_tags (
    .clk, .rst_n,
    .init_done(tag_init_done),
    .rd_en(tag_rd_en), .rd_set(tag_rd_set),
    .rd_valid(t_valid), .rd_dirty(t_dirty), .rd_comp(t_comp), .rd_tag(t_tag),
    .rd_rr(t_rr),
    .wr_en(tag_wr_en), .wr_set(set_q), .wr_way(way_q),
    .wr_valid(tw_valid), .wr_dirty(tw_dirty), .wr_comp(tw_comp), .wr_tag(tag_q),
    .rr_adv(rr_adv)
  );

  logic                            d_rd_en, d_wr_en;
  logic [LINE_BITS+CHECK_BITS-1:0] d_rd_data, d_wr_data;

  rtm_data_array #(.ENTRIES(SETS*WAYS), .IDX_W(IDX_W)) u_data (
    .clk,
    .rd_en(d_rd_en), .rd_idx({set_q, sel_way}), .rd_data(d_rd_data),
    .wr_en(d_wr_en), .wr_idx({set_q, way_q}), .wr_data(d_wr_data),
    .inj_en, .inj_idx({inj_set, inj_way}), .inj_mask
  );

  logic   wp_in_valid, wp_valid, wp_comp;
  line_t  wp_line;
  check_t wp_check;

  llc_write_path u_wpath (
    .clk, .rst_n,
    .in_valid(wp_in_valid), .in_data(wdata_q),
    .out_valid(wp_valid), .out_line(wp_line), .out_check(wp_check),
    .out_comp(wp_comp)
  );

  // upper (L1-side) decode path
  logic  up_in_valid, up_valid, up_comp, up_corr, up_ue;
  line_t up_data;

  llc_decode_path u_up_dec (
    .clk, .rst_n,
    .in_valid(up_in_valid), .in_comp(cur_comp_q),
    .in_line(d_rd_data[LINE_BITS-1:0]), .in_check(d_rd_data[LINE_BITS +: CHECK_BITS]),
    .out_valid(up_valid), .out_comp(up_comp), .out_data(up_data),
    .out_corrected(up_corr), .out_uncorrectable(up_ue)
  );

  // lower (memory-side) decode path for dirty evictions
  logic  lo_in_valid, lo_valid, lo_comp, lo_corr, lo_ue;
  line_t lo_data;

  llc_decode_path u_lo_dec (
    .clk, .rst_n,
    .in_valid(lo_in_valid), .in_comp(v_comp_q),
    .in_line(d_rd_data[LINE_BITS-1:0]), .in_check(d_rd_data[LINE_BITS +: CHECK_BITS]),
    .out_valid(lo_valid), .out_comp(lo_comp), .out_data(lo_data),
    .out_corrected(lo_corr), .out_uncorrectable(lo_ue)
  );

  // fill encoder (memory-side SEC-DED encoder)
  logic   fe_in_valid, fe_valid;
  check_t fe_check;

  secded_encoder u_fill_enc (
    .clk, .rst_n,
    .in_valid(fe_in_valid), .in_data(mem_rsp_data),
    .out_valid(fe_valid), .out_check(fe_check)
  );

  // tag compare on the set just read
  logic [WAYS-1:0] hit_vec, inv_vec;
  logic            hit;
  logic [WW-1:0]   hit_way, victim_way;
  logic            victim_by_rr;

  always_comb begin
    hit_vec = '0;
    inv_vec = '0;
    hit_way = '0;
    victim_way = t_rr;
    victim_by_rr = 1'b1;
    for (int w = 0; w < WAYS; w++) begin
      hit_vec[w] = t_valid[w] && (t_tag[w] == tag_q);
      inv_vec[w] = !t_valid[w];
    end
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (hit_vec[w]) hit_way = WW'(w);
      if (inv_vec[w]) begin
        victim_way = WW'(w);
        victim_by_rr = 1'b0;
      end
    end
    hit = |hit_vec;
  end

  // the data read is issued in S_TAG, with the way the compare just chose
  assign sel_way = (state == S_TAG) ? (hit ? hit_way : victim_way) : way_q;

  // ---------------- controller ----------------
  always_comb begin
    req_ready     = (state == S_IDLE);
    tag_rd_en     = (state == S_IDLE) && req_valid;
    tag_rd_set    = req_laddr[SW-1:0];
    d_rd_en       = 1'b0;
    up_in_valid   = (state == S_DRD);
    lo_in_valid   = (state == S_EVRD);
    fe_in_valid   = 1'b0;
    wp_in_valid   = 1'b0;
    mem_req_valid = (state == S_MREQ) || (state == S_EVWR);
    mem_req_we    = (state == S_EVWR);
    mem_req_laddr = (state == S_EVWR) ? {v_tag_q, set_q} : {tag_q, set_q};
    mem_req_wdata = ev_data_q;
    tag_wr_en     = 1'b0;
    tw_valid      = 1'b0;
    tw_dirty      = 1'b0;
    tw_comp       = 1'b0;
    rr_adv        = 1'b0;
    d_wr_en       = 1'b0;
    d_wr_data     = {wp_check, wp_line};
    case (state)
      S_TAG: begin
        if (hit) d_rd_en = (op_q == OP_READ);
        else     d_rd_en = t_valid[victim_way] && t_dirty[victim_way];
        wp_in_valid = (op_q == OP_WB) &&
                      (hit || !(t_valid[victim_way] && t_dirty[victim_way]));
      end
      S_EVWR:  wp_in_valid = mem_req_ready && (op_q == OP_WB);
      S_MRSP:  fe_in_valid = mem_rsp_valid;
      S_DEC: if (up_valid && up_ue && !cur_dirty_q) begin
        tag_wr_en = 1'b1;            // invalidate the clean block
      end
      S_FILL: if (fe_valid) begin
        d_wr_en   = 1'b1;
        d_wr_data = {fe_check, fill_q};
        tag_wr_en = 1'b1;
        tw_valid  = 1'b1;
        rr_adv    = use_rr_q;
      end
      S_WP: if (wp_valid) begin
        d_wr_en   = 1'b1;
        tag_wr_en = 1'b1;
        tw_valid  = 1'b1;
        tw_dirty  = 1'b1;
        tw_comp   = wp_comp;
        rr_adv    = use_rr_q;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_INIT;
      op_q <= OP_READ; set_q <= '0; tag_q <= '0; way_q <= '0;
      wdata_q <= '0; fill_q <= '0; ev_data_q <= '0;
      cur_dirty_q <= 1'b0; cur_comp_q <= 1'b0; use_rr_q <= 1'b0;
      v_tag_q <= '0; v_comp_q <= 1'b0;
      resp_valid <= 1'b0; resp_op <= OP_READ; resp_data <= '0; resp_err <= 1'b0;
      ev <= '0;
    end else begin
      resp_valid <= 1'b0;
      ev <= '0;
      case (state)
        S_INIT: if (tag_init_done) state <= S_IDLE;
        S_IDLE: if (req_valid) begin
          op_q    <= req_op;
          set_q   <= req_laddr[SW-1:0];
          tag_q   <= req_laddr[LADDR_W-1:SW];
          wdata_q <= req_wdata;
          state   <= S_TAG;
        end
        S_TAG: begin
          if (hit) begin
            way_q       <= hit_way;
            cur_dirty_q <= t_dirty[hit_way];
            cur_comp_q  <= t_comp[hit_way];
            use_rr_q    <= 1'b0;
            state       <= (op_q == OP_READ) ? S_DRD : S_WP;
          end else begin
            way_q    <= victim_way;
            use_rr_q <= victim_by_rr;
            v_tag_q  <= t_tag[victim_way];
            v_comp_q <= t_comp[victim_way];
            ev.rd_miss     <= (op_q == OP_READ);
            ev.evict_clean <= t_valid[victim_way] && !t_dirty[victim_way];
            if (t_valid[victim_way] && t_dirty[victim_way]) state <= S_EVRD;
            else if (op_q == OP_READ)                       state <= S_MREQ;
            else                                            state <= S_WP;
          end
        end
        S_DRD: state <= S_DEC;
        S_DEC: if (up_valid) begin
          if (up_ue && !cur_dirty_q) begin
            ev.clean_refetch <= 1'b1;
            use_rr_q <= 1'b0;
            state    <= S_MREQ;
          end else begin
            resp_valid <= 1'b1;
            resp_op    <= OP_READ;
            resp_data  <= up_data;
            resp_err   <= up_ue;
            ev.rd_hit_comp      <= up_comp;
            ev.rd_hit_plain     <= !up_comp;
            ev.uncorrectable    <= up_ue;
            ev.secded_corrected <= up_corr && !up_comp;
            ev.tecqed_corrected <= up_corr && up_comp;
            state <= S_IDLE;
          end
        end
        S_EVRD: state <= S_EVDEC;
        S_EVDEC: if (lo_valid) begin
          ev_data_q <= lo_data;
          ev.evict_dirty_comp  <= lo_comp;
          ev.evict_dirty_plain <= !lo_comp;
          ev.uncorrectable     <= lo_ue;
          ev.secded_corrected  <= lo_corr && !lo_comp;
          ev.tecqed_corrected  <= lo_corr && lo_comp;
          state <= S_EVWR;
        end
        S_EVWR: if (mem_req_ready) state <= (op_q == OP_READ) ? S_MREQ : S_WP;
        S_MREQ: if (mem_req_ready) state <= S_MRSP;
        S_MRSP: if (mem_rsp_valid) begin
          fill_q <= mem_rsp_data;
          state  <= S_FILL;
        end
        S_FILL: if (fe_valid) begin
          resp_valid <= 1'b1;
          resp_op    <= OP_READ;
          resp_data  <= fill_q;
          resp_err   <= 1'b0;
          state      <= S_IDLE;
        end
        S_WP: if (wp_valid) begin
          resp_valid <= 1'b1;
          resp_op    <= OP_WB;
          resp_data  <= '0;
          resp_err   <= 1'b0;
          ev.wb_compressed   <= wp_comp;
          ev.wb_uncompressed <= !wp_comp;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- handshake rules ----------------
  // Disabled while the tag array is being cleared, which also covers reset;
  // keying them on the state keeps rst_n a purely asynchronous reset.
  a_mem_req_hold: assert property (@(posedge clk) disable iff (state == S_INIT)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_laddr))
    else $error("memory request dropped before it was accepted");
  a_one_path: assert property (@(posedge clk) disable iff (state == S_INIT)
    !(up_in_valid && lo_in_valid))
    else $error("both decode paths started on one read");

endmodule
