// tb_llc_decode_path: uncompressed lines (comp = 0) with SEC-DED errors must
// come back corrected (or flagged) after one cycle; compressed lines (comp = 1,
// a BCH codeword of a BDI payload) with 0..3 errors must come back as the
// original block, decompressed, after four cycles; four errors must be
// flagged. Reference values come from the independent models.
module tb_llc_decode_path;
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

  logic   in_valid = 1'b0, in_comp = 1'b0;
  line_t  in_line = '0;
  check_t in_check = '0;
  logic   out_valid, out_comp, out_corrected, out_uncorrectable;
  line_t  out_data;

  llc_decode_path dut (.clk, .rst_n, .in_valid, .in_comp, .in_line, .in_check,
                       .out_valid, .out_comp, .out_data, .out_corrected,
                       .out_uncorrectable);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(bit comp, blk_t line, logic [63:0] chk, output int lat);
    @(negedge clk);
    in_valid = 1'b1;
    in_comp = comp;
    in_line = line;
    in_check = chk;
    @(negedge clk);
    in_valid = 1'b0;
    lat = 1;
    while (!out_valid && lat < 10) begin
      @(negedge clk);
      lat++;
    end
  endtask

  initial begin
    blk_t b, cw;
    logic [63:0] c;
    logic [483:0] pl;
    int lat, nerr, p, pos[4], k;
    bit dup;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // uncompressed path
    for (int t = 0; t < 60; t++) begin
      b = r_rand_blk();
      c = r_secded_line(b);
      nerr = t % 3;
      if (nerr >= 1) begin p = $urandom % 64; b[p] = ~b[p]; end
      if (nerr == 2) b[(p + 1) % 64] = ~b[(p + 1) % 64];
      run(1'b0, b, c, lat);
      check(lat == 1, $sformatf("SEC-DED path latency %0d", lat));
      check(!out_comp, "comp flag on SEC-DED path");
      if (nerr < 2) begin
        if (nerr == 1) b[p] = ~b[p];
        check(out_data == b && !out_uncorrectable && out_corrected == (nerr == 1),
              "SEC-DED path result");
      end else check(out_uncorrectable, "double error not flagged");
    end
    // compressed path
    for (int t = 0; t < 75; t++) begin
      b = r_make(2 + (t % 6));
      void'(r_bdi(b, pl));
      cw = r_bch_encode(pl);
      nerr = t % 5;
      k = 0;
      while (k < nerr) begin
        pos[k] = $urandom % 512;
        dup = 0;
        for (int j = 0; j < k; j++) if (pos[j] == pos[k]) dup = 1;
        if (!dup) begin cw[pos[k]] = ~cw[pos[k]]; k++; end
      end
      run(1'b1, cw, '0, lat);
      check(lat == 4, $sformatf("TEC-QED path latency %0d", lat));
      check(out_comp, "comp flag missing");
      if (nerr <= 3)
        check(out_data == b && !out_uncorrectable && out_corrected == (nerr > 0),
              $sformatf("TEC-QED path result with %0d errors", nerr));
      else check(out_uncorrectable, "four errors not flagged");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
