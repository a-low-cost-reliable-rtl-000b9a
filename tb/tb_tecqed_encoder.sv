// tb_tecqed_encoder: checks the TEC-QED encoder against an independent BCH
// model. For random 484-bit payloads (and all-zero / all-one corner cases) the
// output line must hold the payload in bits [510:27], have syndromes S1, S3
// and S5 equal to zero (computed bit by bit in GF(2^9)), even overall parity,
// and match a long-division encoder. Latency must be three cycles, and three
// back-to-back inputs must come out on three consecutive cycles.
module tb_tecqed_encoder;
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
  payload_t in_payload = '0;
  logic     out_valid;
  line_t    out_line;

  tecqed_encoder dut (.clk, .rst_n, .in_valid, .in_payload, .out_valid, .out_line);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(payload_t p);
    int lat;
    blk_t ref_cw;
    @(negedge clk);
    in_valid = 1'b1;
    in_payload = p;
    @(negedge clk);
    in_valid = 1'b0;
    lat = 1;
    while (!out_valid && lat < 10) begin
      @(negedge clk);
      lat++;
    end
    check(lat == 3, $sformatf("latency %0d, expected 3", lat));
    ref_cw = r_bch_encode(p);
    check(out_line[510:27] == p, "payload not in bits 510:27");
    check(r_syn(out_line, 1) == 0 && r_syn(out_line, 3) == 0 && r_syn(out_line, 5) == 0,
          "nonzero syndrome");
    check(^out_line == 1'b0, "overall parity odd");
    check(out_line == ref_cw, "differs from long-division encoder");
  endtask

  initial begin
    payload_t p[3];
    int got;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    one('0);
    one('1);
    one(payload_t'(1));
    for (int t = 0; t < 30; t++) one(payload_t'(r_rand_blk()));
    // throughput: three in a row
    for (int k = 0; k < 3; k++) p[k] = payload_t'(r_rand_blk());
    @(negedge clk);
    for (int k = 0; k < 3; k++) begin
      in_valid = 1'b1;
      in_payload = p[k];
      @(negedge clk);
    end
    in_valid = 1'b0;
    got = 0;
    for (int c = 0; c < 6; c++) begin
      if (out_valid) begin
        check(out_line == r_bch_encode(p[got]), "pipelined result");
        got++;
      end
      @(negedge clk);
    end
    check(got == 3, "pipelined count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
