// tb_secded_encoder: checks the SEC-DED encoder's 64 check bits against an
// independent extended Hamming (72,64) model for zero, all-one, walking-one
// and random blocks, and its one-cycle latency and one-block-per-cycle rate.
module tb_secded_encoder;
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
  logic   out_valid;
  check_t out_check;

  secded_encoder dut (.clk, .rst_n, .in_valid, .in_data, .out_valid, .out_check);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blk_t b, prev;
    bit   have_prev;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    have_prev = 0;
    // stream one block per cycle; each result must appear on the next cycle
    for (int t = 0; t < 600; t++) begin
      if (t == 0) b = '0;
      else if (t == 1) b = '1;
      else if (t < 514) b = blk_t'(1) << (t - 2);
      else b = r_rand_blk();
      @(negedge clk);
      if (have_prev) begin
        check(out_valid, "out_valid missing one cycle after input");
        check(out_check == r_secded_line(prev), $sformatf("check bits wrong, case %0d", t - 1));
      end
      in_valid = 1'b1;
      in_data = b;
      prev = b;
      have_prev = 1;
    end
    @(negedge clk);
    in_valid = 1'b0;
    check(out_valid && out_check == r_secded_line(prev), "last block");
    @(negedge clk);
    check(!out_valid, "out_valid without input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
