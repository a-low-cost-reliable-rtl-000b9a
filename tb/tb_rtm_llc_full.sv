// tb_rtm_llc_full: end-to-end test of the cache at its default size, 2 MB in
// 2048 sets of 16 ways; see llc_env for what is checked.
module tb_rtm_llc_full;
  logic done;
  int checks, failures;

  llc_env #(.SMALL(1'b0), .N_RANDOM(600)) env (.done, .checks, .failures);

  initial begin
    repeat (400000) @(posedge env.clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    @(posedge done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
