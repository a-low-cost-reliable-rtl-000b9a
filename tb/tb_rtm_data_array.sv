// tb_rtm_data_array: random writes and reads against a model, one-cycle read
// latency, in-place bit flips through the injection port, and a write winning
// over an injection in the same cycle.
module tb_rtm_data_array;
  import rtm_llc_pkg::*;

  localparam int unsigned ENTRIES = 64, IDX_W = 6, W = LINE_BITS + CHECK_BITS;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic rd_en = 1'b0, wr_en = 1'b0, inj_en = 1'b0;
  logic [IDX_W-1:0] rd_idx = '0, wr_idx = '0, inj_idx = '0;
  logic [W-1:0] rd_data, wr_data = '0, inj_mask = '0;

  rtm_data_array #(.ENTRIES(ENTRIES), .IDX_W(IDX_W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] model [ENTRIES];

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic rd_check(int i);
    @(negedge clk);
    rd_en = 1'b1;
    rd_idx = IDX_W'(i);
    @(negedge clk);
    rd_en = 1'b0;
    check(rd_data == model[i], $sformatf("entry %0d", i));
  endtask

  initial begin
    for (int i = 0; i < ENTRIES; i++) begin
      model[i] = rnd();
      @(negedge clk);
      wr_en = 1'b1;
      wr_idx = IDX_W'(i);
      wr_data = model[i];
    end
    @(negedge clk);
    wr_en = 1'b0;
    for (int i = 0; i < ENTRIES; i++) rd_check(i);
    for (int t = 0; t < 200; t++) begin
      int i;
      i = $urandom % ENTRIES;
      @(negedge clk);
      case ($urandom % 3)
        0: begin
          wr_en = 1'b1; wr_idx = IDX_W'(i); wr_data = rnd(); model[i] = wr_data;
        end
        1: begin
          inj_en = 1'b1; inj_idx = IDX_W'(i); inj_mask = '0;
          inj_mask[$urandom % W] = 1'b1;
          inj_mask[$urandom % W] = 1'b1;
          model[i] = model[i] ^ inj_mask;
        end
        default: begin
          wr_en = 1'b1; wr_idx = IDX_W'(i); wr_data = rnd(); model[i] = wr_data;
          inj_en = 1'b1; inj_idx = IDX_W'(i); inj_mask = '1;
        end
      endcase
      @(negedge clk);
      wr_en = 1'b0;
      inj_en = 1'b0;
      rd_check(i);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
