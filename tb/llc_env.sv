// llc_env: end-to-end test environment for rtm_llc_top.
//
// Plays the part of the L1 caches (one request at a time) and of main memory
// (random ready and response delay), keeps a golden copy of every block as
// the cores last wrote it, and checks every read response and every block
// written back to memory against it. Error injection flips bits of stored
// lines, located by looking at the tag array.
//
// The directed part makes every mechanism happen: read miss and fill, clean
// and plain hits, compressed and uncompressed write-backs, compressed-hit
// latency (three cycles more than a plain hit: TEC-QED 3 + decompress 1
// instead of SEC-DED 1), clean, dirty-plain and dirty-compressed evictions,
// SEC-DED and TEC-QED corrections, recovery of a clean block by refetch and a
// reported uncorrectable dirty block. A random phase follows. Each event is
// counted and one that never happened is a failure.
//
// SMALL = 1 builds the cache with 16 sets of 4 ways, SMALL = 0 with the
// default parameters (2048 sets of 16 ways).
module llc_env
  import rtm_llc_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter bit SMALL    = 1'b1,
  parameter int N_RANDOM = 1000
) (
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int unsigned SETS = SMALL ? 16 : 2048;
  localparam int unsigned WAYS = SMALL ? 4 : 16;
  localparam int unsigned SW = $clog2(SETS), WW = $clog2(WAYS);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic        req_valid = 1'b0, req_ready;
  llc_op_e     req_op = OP_READ;
  laddr_t      req_laddr = '0;
  line_t       req_wdata = '0;
  logic        resp_valid, resp_err;
  llc_op_e     resp_op;
  line_t       resp_data;
  logic        mem_req_valid, mem_req_ready, mem_req_we;
  laddr_t      mem_req_laddr;
  line_t       mem_req_wdata;
  logic        mem_rsp_valid;
  line_t       mem_rsp_data;
  logic        inj_en = 1'b0;
  logic [SW-1:0] inj_set = '0;
  logic [WW-1:0] inj_way = '0;
  logic [LINE_BITS+CHECK_BITS-1:0] inj_mask = '0;
  llc_events_t ev;

  if (SMALL) begin : g
    rtm_llc_top #(.SETS(16), .WAYS(4)) dut (.*);
  end else begin : g
    rtm_llc_top dut (.*);
  end

  // ---------------- main memory model ----------------
  line_t mem_store [laddr_t];
  line_t golden    [laddr_t];
  bit    lost      [laddr_t];

  function automatic line_t mem_init(laddr_t a);
    // some blocks compressible, some not
    return r_make((a[1:0] == 2'b00) ? 15 : 2 + (int'(a) % 6));
  endfunction

  task automatic touch(laddr_t a);
    if (!mem_store.exists(a)) begin
      mem_store[a] = mem_init(a);
      golden[a] = mem_store[a];
    end
  endtask

  int  rsp_delay = 0;
  bit  rsp_pending = 0;
  laddr_t rsp_addr;
  int  mem_writes = 0;

  always_ff @(posedge clk) begin
    mem_req_ready <= ($urandom % 3) != 0;
  end

  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req_we) begin
        mem_writes++;
        if (!lost.exists(mem_req_laddr))
          check(mem_req_wdata == golden[mem_req_laddr],
                $sformatf("block %h written to memory differs from golden", mem_req_laddr));
        mem_store[mem_req_laddr] = mem_req_wdata;
      end else begin
        check(!rsp_pending, "second memory read while one is pending");
        rsp_pending = 1;
        rsp_addr = mem_req_laddr;
        rsp_delay = 1 + int'($urandom % 6);
      end
    end else if (rsp_pending) begin
      rsp_delay--;
      if (rsp_delay == 0) begin
        rsp_pending = 0;
        if (!mem_store.exists(rsp_addr)) mem_store[rsp_addr] = mem_init(rsp_addr);
        mem_rsp_valid <= 1'b1;
        mem_rsp_data  <= mem_store[rsp_addr];
      end
    end
  end

  // ---------------- event counters ----------------
  localparam int NEV = $bits(llc_events_t);
  int ev_cnt [NEV];
  always @(posedge clk) if (rst_n) for (int i = 0; i < NEV; i++) if (ev[i]) ev_cnt[i]++;

  // ---------------- L1 side ----------------
  task automatic request(llc_op_e op, laddr_t a, line_t d, output line_t rd,
                         output bit err, output int lat);
    touch(a);
    @(negedge clk);
    req_valid = 1'b1;
    req_op = op;
    req_laddr = a;
    req_wdata = d;
    // req_ready is stable at the falling edge; the request is taken at the
    // next rising edge
    lat = 0;
    while (!req_ready && lat <= 5000) begin
      @(negedge clk);
      lat++;
    end
    check(req_ready, "request never accepted");
    @(negedge clk);
    req_valid = 1'b0;
    lat = 0;
    while (!resp_valid && lat <= 5000) begin
      @(negedge clk);
      lat++;
    end
    check(resp_valid && resp_op == op, "no response or wrong op");
    // a cache that stopped answering ends the test here
    if (!resp_valid) begin
      done = 1'b1;
      wait (1'b0);
    end
    rd = resp_data;
    err = resp_err;
  endtask

  task automatic rd_check(laddr_t a, output int lat);
    line_t rd;
    bit err;
    request(OP_READ, a, '0, rd, err, lat);
    if (!lost.exists(a)) begin
      check(!err, $sformatf("unexpected error reading %h", a));
      check(rd == golden[a], $sformatf("read %h differs from golden", a));
    end
  endtask

  task automatic wb(laddr_t a, line_t d);
    line_t rd;
    bit err;
    int lat;
    request(OP_WB, a, d, rd, err, lat);
    golden[a] = d;
    if (lost.exists(a)) lost.delete(a);
  endtask

  function automatic laddr_t la(int unsigned tag, int unsigned set);
    return laddr_t'((tag << SW) | set);
  endfunction

  // find the way holding a block (testbench peeks at the tag array)
  function automatic int find_way(laddr_t a);
    for (int w = 0; w < WAYS; w++)
      if (g.dut.u_tags.mem[a[SW-1:0]][w].valid &&
          g.dut.u_tags.mem[a[SW-1:0]][w].tag == a[LADDR_W-1:SW]) return w;
    return -1;
  endfunction

  task automatic inject(laddr_t a, int nbits, int first_bit, int spacing);
    int w;
    w = find_way(a);
    check(w >= 0, $sformatf("block %h not resident for injection", a));
    @(negedge clk);
    inj_en = 1'b1;
    inj_set = a[SW-1:0];
    inj_way = WW'(w);
    inj_mask = '0;
    for (int k = 0; k < nbits; k++) inj_mask[first_bit + k*spacing] = 1'b1;
    @(negedge clk);
    inj_en = 1'b0;
  endtask

  initial begin
    int lat_plain, lat_comp, lat;
    line_t rd, d;
    bit err;
    checks = 0;
    failures = 0;
    done = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // --- miss, fill and plain hit
    rd_check(la(1, 3), lat);
    check(ev_cnt[$bits(llc_events_t) - 5] > 0, "read miss not seen");  // rd_miss
    rd_check(la(1, 3), lat_plain);
    // --- compressed write-back, then compressed hit latency
    wb(la(1, 3), r_make(2));
    rd_check(la(1, 3), lat_comp);
    check(lat_comp - lat_plain == 3,
          $sformatf("compressed hit %0d cycles, plain hit %0d: expected +3", lat_comp, lat_plain));
    // --- incompressible write-back
    wb(la(2, 3), r_make(15));
    rd_check(la(2, 3), lat);
    check(lat == lat_plain, "uncompressed dirty hit slower than clean hit");
    // --- SEC-DED single-bit correction on the dirty plain block
    inject(la(2, 3), 1, 100, 1);
    rd_check(la(2, 3), lat);
    // --- TEC-QED triple-error correction on the compressed block
    inject(la(1, 3), 3, 5, 97);
    rd_check(la(1, 3), lat);
    // (the stored copy still holds the three errors; rewrite it)
    wb(la(1, 3), r_make(3));
    // --- clean block with a double error in one word: invalidate + refetch
    rd_check(la(3, 3), lat);
    inject(la(3, 3), 2, 10, 1);
    rd_check(la(3, 3), lat);
    rd_check(la(3, 3), lat);
    // --- dirty uncompressed block with a double error: reported, lost
    wb(la(4, 5), r_make(15));
    inject(la(4, 5), 2, 200, 3);
    request(OP_READ, la(4, 5), '0, rd, err, lat);
    check(err, "uncorrectable dirty block not reported");
    lost[la(4, 5)] = 1;
    wb(la(4, 5), r_make(4));
    // --- fill set 7 with dirty compressed and plain blocks, then overflow it
    for (int t = 0; t < 2*WAYS; t++) begin
      if (t % 3 == 2) rd_check(la(10 + t, 7), lat);
      else wb(la(10 + t, 7), r_make((t % 3 == 0) ? 2 + (t % 6) : 15));
    end
    for (int t = 0; t < 2*WAYS; t++) rd_check(la(10 + t, 7), lat);
    // --- random traffic over a few sets
    for (int t = 0; t < N_RANDOM; t++) begin
      laddr_t a;
      int cls;
      a = la($urandom % (2*WAYS + 2), $urandom % 4);
      case ($urandom % 8)
        0, 1, 2: begin
          cls = $urandom % 9;
          wb(a, r_make(cls == 8 ? 15 : cls));
        end
        3: begin
          // occasional single-bit error in a resident block
          if (find_way(a) >= 0) inject(a, 1, int'($urandom % 512), 1);
          rd_check(a, lat);
        end
        default: rd_check(a, lat);
      endcase
    end
    // --- every mechanism must have happened
    begin
      automatic string names [12] = '{"wb_compressed", "wb_uncompressed", "rd_hit_comp",
                            "rd_hit_plain", "rd_miss", "evict_dirty_comp",
                            "evict_dirty_plain", "evict_clean", "clean_refetch",
                            "secded_corrected", "tecqed_corrected", "uncorrectable"};
      for (int i = 0; i < NEV; i++) begin
        $display("event %-18s %0d", names[i], ev_cnt[NEV - 1 - i]);
        check(ev_cnt[NEV - 1 - i] > 0, $sformatf("event %s never happened", names[i]));
      end
    end
    $display("memory writes %0d", mem_writes);
    done = 1'b1;
  end

endmodule
