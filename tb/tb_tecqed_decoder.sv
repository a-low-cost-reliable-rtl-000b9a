// tb_tecqed_decoder: checks the TEC-QED decoder with codewords from an
// independent long-division BCH encoder and random error patterns anywhere in
// the 512-bit line: 0..3 errors must be corrected (payload equal to the
// original, out_corrected set when errors > 0), four errors must be flagged
// uncorrectable. Every error weight is tried many times, including errors in
// the check bits and in the overall-parity bit. Latency must be three cycles.
module tb_tecqed_decoder;
  import rtm_llc_pkg::*;
  import tb_ref_pkg::*;

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

  logic     in_valid = 1'b0;
  line_t    in_line = '0;
  logic     out_valid, out_corrected, out_uncorrectable;
  payload_t out_payload;

  tecqed_decoder dut (.clk, .rst_n, .in_valid, .in_line, .out_valid, .out_payload,
                      .out_corrected, .out_uncorrectable);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(payload_t p, int nerr, int fixed_pos);
    int lat, pos[4], k;
    bit dup;
    blk_t cw;
    cw = r_bch_encode(p);
    k = 0;
    while (k < nerr) begin
      pos[k] = (k == 0 && fixed_pos >= 0) ? fixed_pos : int'($urandom % 512);
      dup = 0;
      for (int j = 0; j < k; j++) if (pos[j] == pos[k]) dup = 1;
      if (!dup) begin
        cw[pos[k]] = ~cw[pos[k]];
        k++;
      end
    end
    @(negedge clk);
    in_valid = 1'b1;
    in_line = cw;
    @(negedge clk);
    in_valid = 1'b0;
    lat = 1;
    while (!out_valid && lat < 10) begin
      @(negedge clk);
      lat++;
    end
    check(lat == 3, $sformatf("latency %0d, expected 3", lat));
    if (nerr <= 3) begin
      check(!out_uncorrectable, $sformatf("%0d errors flagged uncorrectable", nerr));
      check(out_payload == p, $sformatf("%0d errors not corrected", nerr));
      check(out_corrected == (nerr > 0), $sformatf("corrected flag wrong for %0d errors", nerr));
    end else begin
      check(out_uncorrectable, "4 errors not detected");
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int e = 0; e <= 4; e++)
      for (int t = 0; t < 40; t++) one(payload_t'(r_rand_blk()), e, -1);
    // errors placed on the parity bit and on check bits
    one(payload_t'(r_rand_blk()), 1, 511);
    one(payload_t'(r_rand_blk()), 2, 511);
    one(payload_t'(r_rand_blk()), 3, 511);
    one(payload_t'(r_rand_blk()), 4, 511);
    one(payload_t'(r_rand_blk()), 1, 0);
    one(payload_t'(r_rand_blk()), 3, 26);
    one('0, 3, 510);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
