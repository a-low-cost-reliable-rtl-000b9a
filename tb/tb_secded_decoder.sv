// tb_secded_decoder: checks the SEC-DED decoder with check bits from an
// independent (72,64) model. Per trial, each of the eight 64-bit words gets
// zero, one or two bit flips anywhere in its 72 bits (data or check). One flip
// per word must be corrected; a double flip in any word must raise
// out_uncorrectable. Latency must be one cycle.
module tb_secded_decoder;
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
  check_t in_check = '0;
  logic   out_valid, out_corrected, out_uncorrectable;
  line_t  out_data;

  secded_decoder dut (.clk, .rst_n, .in_valid, .in_data, .in_check, .out_valid,
                      .out_data, .out_corrected, .out_uncorrectable);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blk_t d, rd;
    logic [63:0] c, rc;
    int nflip[8], any1, any2, p, q;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      d = r_rand_blk();
      c = r_secded_line(d);
      rd = d;
      rc = c;
      any1 = 0;
      any2 = 0;
      for (int w = 0; w < 8; w++) begin
        nflip[w] = (t < 100) ? 0 : (t < 250) ? int'($urandom % 2) : int'($urandom % 3);
        if (nflip[w] >= 1) begin
          p = $urandom % 72;
          if (p < 64) rd[w*64 + p] = ~rd[w*64 + p]; else rc[w*8 + p - 64] = ~rc[w*8 + p - 64];
          any1 = 1;
        end
        if (nflip[w] == 2) begin
          do q = $urandom % 72; while (q == p);
          if (q < 64) rd[w*64 + q] = ~rd[w*64 + q]; else rc[w*8 + q - 64] = ~rc[w*8 + q - 64];
          any2 = 1;
        end
      end
      @(negedge clk);
      in_valid = 1'b1;
      in_data = rd;
      in_check = rc;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid, "latency not one cycle");
      check(out_uncorrectable == any2, $sformatf("uncorrectable flag wrong, trial %0d", t));
      if (!any2) begin
        check(out_data == d, $sformatf("data not corrected, trial %0d", t));
        check(out_corrected == any1, $sformatf("corrected flag wrong, trial %0d", t));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
