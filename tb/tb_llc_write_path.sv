// tb_llc_write_path: a block written back from L1 must come out five cycles
// later as either (compressible) the extended BCH codeword of its BDI payload
// with comp = 1 and a zero SEC-DED field, or (incompressible) the raw block
// with its SEC-DED check bits and comp = 0. Expected values come from the
// independent BDI, BCH and Hamming models. A back-to-back stream is checked
// too.
module tb_llc_write_path;
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

  logic   in_valid = 1'b0;
  line_t  in_data = '0;
  logic   out_valid, out_comp;
  line_t  out_line;
  check_t out_check;

  llc_write_path dut (.clk, .rst_n, .in_valid, .in_data, .out_valid, .out_line,
                      .out_check, .out_comp);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int unsigned CLASSES [9] = '{0, 1, 2, 3, 4, 5, 6, 7, 15};

  task automatic compare(blk_t b);
    logic [483:0] pl;
    int unsigned code;
    code = r_bdi(b, pl);
    if (code != 15) begin
      check(out_comp, "compressible block not marked comp");
      check(out_line == r_bch_encode(pl), "stored line is not the TEC-QED codeword");
      check(out_check == '0, "SEC-DED field not zero for compressed block");
    end else begin
      check(!out_comp, "incompressible block marked comp");
      check(out_line == b, "raw block changed");
      check(out_check == r_secded_line(b), "SEC-DED bits wrong");
    end
  endtask

  initial begin
    blk_t b, q[$];
    int lat, ncomp;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    ncomp = 0;
    for (int t = 0; t < 90; t++) begin
      b = r_make(CLASSES[t % 9]);
      @(negedge clk);
      in_valid = 1'b1;
      in_data = b;
      @(negedge clk);
      in_valid = 1'b0;
      lat = 1;
      while (!out_valid && lat < 12) begin
        @(negedge clk);
        lat++;
      end
      check(lat == 5, $sformatf("latency %0d, expected 5", lat));
      compare(b);
      if (out_comp) ncomp++;
    end
    check(ncomp == 80, $sformatf("%0d compressed, expected 80", ncomp));
    @(negedge clk);
    for (int t = 0; t < 18; t++) begin
      b = r_make(CLASSES[t % 9]);
      q.push_back(b);
      in_valid = 1'b1;
      in_data = b;
      @(negedge clk);
      if (out_valid) compare(q.pop_front());
    end
    in_valid = 1'b0;
    for (int c = 0; c < 6; c++) begin
      @(negedge clk);
      if (out_valid) compare(q.pop_front());
    end
    check(q.size() == 0, "stream lost blocks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
