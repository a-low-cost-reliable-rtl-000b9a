// tb_rtm_llc_mixes: replays the cache-occupancy mix of each evaluated workload.
//
// The source design was evaluated with fifteen SPEC CPU2017 workload mixes
// (Mix0..Mix14) on a quad-core system. Those instruction traces cannot be run
// here. What this cache sees of them is the share of its blocks that are
// clean, dirty and compressible, or dirty and incompressible; the published
// breakdown per mix is in MIX_CLEAN / MIX_INCMP below (percent). The mixes
// differ only in these numbers, so one testbench runs them all.
//
// For each mix the cache is reset and filled with exactly its capacity of new
// blocks. Each block's class is drawn from the mix's shares, in a shuffled
// order:
//   clean                -> L1 read miss, block fetched from memory
//   compressible dirty   -> L1 write-back of a BDI-compressible block
//   incompressible dirty -> L1 write-back of a random block
// The testbench then checks:
//   - the tag array holds the expected number of blocks in each class
//     (valid/dirty/comp bits);
//   - the event pulses agree with those counts;
//   - every block reads back equal to what was written or fetched;
//   - every compressed hit takes 3 cycles more than every plain hit.
// It prints the achieved breakdown next to the published one.
// The cache runs at 32 sets x 16 ways (512 blocks), so fifteen fills stay
// short. The way count and the datapath are those of the full design.
module tb_rtm_llc_mixes;
  import rtm_llc_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned SETS = 32, WAYS = 16, NBLK = SETS * WAYS;
  localparam int unsigned SW = $clog2(SETS), WW = $clog2(WAYS);
  localparam int NMIX = 15;
  // share of clean and of incompressible dirty blocks per mix, in 0.1 %
  localparam int MIX_CLEAN [NMIX] = '{916, 902, 921, 928, 853, 836, 776, 774,
                                       734, 724, 726, 732, 766, 847, 846};
  localparam int MIX_INCMP [NMIX] = '{12, 8, 7, 6, 12, 20, 41, 37,
                                       17, 50, 2, 23, 10, 22, 22};

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

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
  logic        mem_rsp_valid = 1'b0;
  line_t       mem_rsp_data = '0;
  logic        inj_en = 1'b0;
  logic [SW-1:0] inj_set = '0;
  logic [WW-1:0] inj_way = '0;
  logic [LINE_BITS+CHECK_BITS-1:0] inj_mask = '0;
  llc_events_t ev;

  rtm_llc_top #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // ---------------- main memory: always ready, fixed 4-cycle reads ----------
  line_t golden [laddr_t];
  int    rsp_cnt = 0;
  laddr_t rsp_addr;
  int    mem_writes = 0;
  assign mem_req_ready = 1'b1;

  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (mem_req_valid && mem_req_we) mem_writes++;
    if (mem_req_valid && !mem_req_we) begin
      rsp_addr = mem_req_laddr;
      rsp_cnt  = 4;
    end else if (rsp_cnt > 0) begin
      rsp_cnt--;
      if (rsp_cnt == 0) begin
        mem_rsp_valid <= 1'b1;
        mem_rsp_data  <= golden[rsp_addr];
      end
    end
  end

  // ---------------- event counters ----------------
  int n_wbc, n_wbu, n_miss, n_hitc, n_hitp;
  always @(posedge clk) if (rst_n) begin
    n_wbc  += int'(ev.wb_compressed);
    n_wbu  += int'(ev.wb_uncompressed);
    n_miss += int'(ev.rd_miss);
    n_hitc += int'(ev.rd_hit_comp);
    n_hitp += int'(ev.rd_hit_plain);
  end

  // ---------------- L1 side ----------------
  task automatic request(llc_op_e op, laddr_t a, line_t d, output line_t rd,
                         output int lat);
    @(negedge clk);
    req_valid = 1'b1;
    req_op = op;
    req_laddr = a;
    req_wdata = d;
    lat = 0;
    while (!req_ready && lat <= 5000) begin
      @(negedge clk);
      lat++;
    end
    @(negedge clk);
    req_valid = 1'b0;
    lat = 0;
    while (!resp_valid && lat <= 5000) begin
      @(negedge clk);
      lat++;
    end
    check(resp_valid && resp_op == op, "no response or wrong op");
    rd = resp_data;
    if (!resp_valid) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  endtask

  task automatic do_reset();
    @(negedge clk);
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    n_wbc = 0; n_wbu = 0; n_miss = 0; n_hitc = 0; n_hitp = 0;
  endtask

  initial begin
    int cls [NBLK];
    line_t rd;
    int lat, lat_c, lat_p, want [3], got [3], tmp, k;
    laddr_t a;
    lat_c = -1;
    lat_p = -1;
    for (int m = 0; m < NMIX; m++) begin
      do_reset();
      // classes: 0 clean, 1 compressible dirty, 2 incompressible dirty
      want[0] = (NBLK * MIX_CLEAN[m] + 500) / 1000;
      want[2] = (NBLK * MIX_INCMP[m] + 500) / 1000;
      want[1] = NBLK - want[0] - want[2];
      for (int i = 0; i < NBLK; i++)
        cls[i] = (i < want[0]) ? 0 : (i < want[0] + want[1]) ? 1 : 2;
      for (int i = NBLK - 1; i > 0; i--) begin
        k = int'($urandom % (i + 1));
        tmp = cls[i]; cls[i] = cls[k]; cls[k] = tmp;
      end
      // fill: line address m*2^16 + i puts exactly WAYS blocks in every set
      for (int i = 0; i < NBLK; i++) begin
        a = laddr_t'((m << 16) + i);
        case (cls[i])
          0: begin
            golden[a] = r_make(($urandom % 2 != 0) ? 15 : $urandom % 8);
            request(OP_READ, a, '0, rd, lat);
            check(rd == golden[a], $sformatf("mix%0d: fetched %h differs", m, a));
          end
          1: begin
            golden[a] = r_make($urandom % 8);
            request(OP_WB, a, golden[a], rd, lat);
          end
          default: begin
            golden[a] = r_rand_blk();
            request(OP_WB, a, golden[a], rd, lat);
          end
        endcase
      end
      // let the last event pulse land, then read the occupancy from the tag bits
      repeat (3) @(negedge clk);
      got = '{0, 0, 0};
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          check(dut.u_tags.mem[s][w].valid, $sformatf("mix%0d: set %0d way %0d empty", m, s, w));
          if (!dut.u_tags.mem[s][w].dirty) got[0]++;
          else if (dut.u_tags.mem[s][w].comp) got[1]++;
          else got[2]++;
        end
      for (int c = 0; c < 3; c++)
        check(got[c] == want[c], $sformatf("mix%0d: class %0d holds %0d blocks, expected %0d",
                                           m, c, got[c], want[c]));
      check(n_miss == want[0] && n_wbc == want[1] && n_wbu == want[2],
            $sformatf("mix%0d: events miss/wbc/wbu %0d/%0d/%0d", m, n_miss, n_wbc, n_wbu));
      check(mem_writes == 0, "a fill of exactly the capacity evicted something");
      // read everything back: all hits
      for (int i = 0; i < NBLK; i++) begin
        a = laddr_t'((m << 16) + i);
        request(OP_READ, a, '0, rd, lat);
        check(rd == golden[a], $sformatf("mix%0d: read %h differs", m, a));
        if (cls[i] == 1) begin
          if (lat_c < 0) lat_c = lat;
          check(lat == lat_c, $sformatf("mix%0d: compressed hit took %0d, not %0d", m, lat, lat_c));
        end else begin
          if (lat_p < 0) lat_p = lat;
          check(lat == lat_p, $sformatf("mix%0d: plain hit took %0d, not %0d", m, lat, lat_p));
        end
      end
      repeat (3) @(negedge clk);
      check(n_hitc == want[1] && n_hitp == want[0] + want[2],
            $sformatf("mix%0d: hit events %0d/%0d", m, n_hitc, n_hitp));
      $display("Mix%0d: clean %5.1f%%  compressible dirty %5.1f%%  incompressible dirty %4.1f%%  (published %5.1f / %5.1f / %4.1f)",
               m, 100.0 * got[0] / NBLK, 100.0 * got[1] / NBLK, 100.0 * got[2] / NBLK,
               MIX_CLEAN[m] / 10.0, (1000 - MIX_CLEAN[m] - MIX_INCMP[m]) / 10.0, MIX_INCMP[m] / 10.0);
    end
    check(lat_c == lat_p + 3, $sformatf("compressed hit %0d vs plain hit %0d cycles", lat_c, lat_p));
    $display("hit latency: plain %0d, compressed %0d cycles", lat_p, lat_c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
