// tb_bdi_decompressor: the independent BDI model packs blocks of every class;
// the decompressor must rebuild the original block exactly, one cycle later.
// An undefined encoding must raise out_bad.
module tb_bdi_decompressor;
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
  logic     out_valid, out_bad;
  line_t    out_data;

  bdi_decompressor dut (.clk, .rst_n, .in_valid, .in_payload, .out_valid, .out_data, .out_bad);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int unsigned CLASSES [8] = '{0, 1, 2, 3, 4, 5, 6, 7};

  initial begin
    blk_t b;
    logic [483:0] pl;
    int unsigned code;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 240; t++) begin
      b = r_make(CLASSES[t % 8]);
      code = r_bdi(b, pl);
      @(negedge clk);
      in_valid = 1'b1;
      in_payload = pl;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid, "latency not one cycle");
      check(out_data == b, $sformatf("block of encoding %0d not rebuilt", code));
      check(!out_bad, "bad flag on a valid payload");
    end
    @(negedge clk);
    in_valid = 1'b1;
    in_payload = '0;
    in_payload[3:0] = 4'd12;
    @(negedge clk);
    in_valid = 1'b0;
    check(out_valid && out_bad, "undefined encoding not flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
