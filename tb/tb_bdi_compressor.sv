// tb_bdi_compressor: checks BDI compression against an independent model.
// Blocks of every class (all-zero, repeated, each base+delta form, random) are
// generated; the model picks the smallest encoding that works. The DUT must
// report the same encoding, size and Compressible? decision, and its payload
// must equal the model's packing. Latency must be two cycles, and a stream of
// back-to-back blocks must come out one per cycle.
module tb_bdi_compressor;
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

  logic       in_valid = 1'b0;
  line_t      in_data = '0;
  logic       out_valid, out_compressible;
  bdi_enc_e   out_enc;
  payload_t   out_payload;
  logic [9:0] out_size_bits;

  bdi_compressor dut (.clk, .rst_n, .in_valid, .in_data, .out_valid, .out_compressible,
                      .out_enc, .out_payload, .out_size_bits);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int unsigned CLASSES [9] = '{0, 1, 2, 3, 4, 5, 6, 7, 15};

  task automatic compare(blk_t b, int unsigned cls);
    logic [483:0] pl;
    int unsigned code;
    code = r_bdi(b, pl);
    check(int'(out_enc) == int'(code),
          $sformatf("class %0d: encoding %0d, expected %0d", cls, out_enc, code));
    check(out_compressible == (code != 15), "compressible flag");
    check(int'(out_size_bits) == int'(r_bdi_size(code)), "size");
    if (code != 15) check(out_payload == pl, $sformatf("payload, class %0d", cls));
  endtask

  initial begin
    blk_t b, q[$];
    int   lat, cls_q[$], seen[int];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 180; t++) begin
      int unsigned cls;
      cls = CLASSES[t % 9];
      b = r_make(cls);
      @(negedge clk);
      in_valid = 1'b1;
      in_data = b;
      @(negedge clk);
      in_valid = 1'b0;
      lat = 1;
      while (!out_valid && lat < 10) begin
        @(negedge clk);
        lat++;
      end
      check(lat == 2, $sformatf("latency %0d, expected 2", lat));
      compare(b, cls);
      // generated class must be found (a smaller one may also apply)
      check(int'(out_enc) != 15 || cls == 15, $sformatf("class %0d not compressed", cls));
      seen[int'(out_enc)] = 1;
    end
    check(seen.num() == 9, $sformatf("only %0d encodings produced", seen.num()));
    // streaming
    @(negedge clk);
    for (int t = 0; t < 20; t++) begin
      b = r_make(CLASSES[t % 9]);
      q.push_back(b);
      cls_q.push_back(CLASSES[t % 9]);
      in_valid = 1'b1;
      in_data = b;
      @(negedge clk);
      if (out_valid) compare(q.pop_front(), cls_q.pop_front());
    end
    in_valid = 1'b0;
    for (int c = 0; c < 4; c++) begin
      @(negedge clk);
      if (out_valid) compare(q.pop_front(), cls_q.pop_front());
    end
    check(q.size() == 0, "stream lost blocks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
