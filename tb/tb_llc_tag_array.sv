// tb_llc_tag_array: after reset the sweep must take SETS cycles and leave
// every entry invalid (the array starts with random contents); writes to
// single ways must read back one cycle later without disturbing other ways;
// the round-robin pointer must advance only on rr_adv.
module tb_llc_tag_array;
  import rtm_llc_pkg::*;

  localparam int unsigned SETS = 32, WAYS = 4, TAG_W = 10;
  localparam int unsigned SW = $clog2(SETS), WW = $clog2(WAYS);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic init_done, rd_en = 1'b0, wr_en = 1'b0, rr_adv = 1'b0;
  logic [SW-1:0] rd_set = '0, wr_set = '0;
  logic [WW-1:0] wr_way = '0, rd_rr;
  logic [WAYS-1:0] rd_valid, rd_dirty, rd_comp;
  logic [WAYS-1:0][TAG_W-1:0] rd_tag;
  logic wr_valid = 1'b0, wr_dirty = 1'b0, wr_comp = 1'b0;
  logic [TAG_W-1:0] wr_tag = '0;

  llc_tag_array #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TAG_W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model
  logic [TAG_W+2:0] model [SETS][WAYS];
  int rr_model [SETS];

  task automatic read_check(int s);
    @(negedge clk);
    rd_en = 1'b1;
    rd_set = SW'(s);
    @(negedge clk);
    rd_en = 1'b0;
    for (int w = 0; w < WAYS; w++)
      check({rd_valid[w], rd_dirty[w], rd_comp[w], rd_tag[w]} == model[s][w],
            $sformatf("set %0d way %0d", s, w));
    check(int'(rd_rr) == rr_model[s], $sformatf("rr of set %0d", s));
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    cyc = 0;
    while (!init_done) begin
      @(posedge clk);
      cyc++;
    end
    check(cyc >= SETS && cyc <= SETS + 1, $sformatf("init took %0d cycles", cyc));
    for (int s = 0; s < SETS; s++) begin
      rr_model[s] = 0;
      for (int w = 0; w < WAYS; w++) model[s][w] = '0;
    end
    for (int s = 0; s < SETS; s++) read_check(s);
    for (int t = 0; t < 300; t++) begin
      int s, w;
      s = $urandom % SETS;
      w = $urandom % WAYS;
      @(negedge clk);
      wr_en = 1'b1;
      wr_set = SW'(s);
      wr_way = WW'(w);
      {wr_valid, wr_dirty, wr_comp} = 3'($urandom);
      wr_tag = TAG_W'($urandom);
      rr_adv = ($urandom % 3) == 0;
      model[s][w] = {wr_valid, wr_dirty, wr_comp, wr_tag};
      if (rr_adv) rr_model[s] = (rr_model[s] + 1) % WAYS;
      @(negedge clk);
      wr_en = 1'b0;
      rr_adv = 1'b0;
      read_check(s);
    end
    for (int s = 0; s < SETS; s++) read_check(s);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
