// tb_rtm_llc_top: end-to-end test of the cache at reduced size (16 sets of
// 4 ways) with a long random phase; see llc_env for what is checked.
module tb_rtm_llc_top;
  logic done;
  int checks, failures;

  llc_env #(.SMALL(1'b1), .N_RANDOM(3000)) env (.done, .checks, .failures);

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
