// tb_congestion_analyzer: drives 3x3 blocks with every MSB count 0..9
// (directed) and random blocks, and compares the MSB sum and the block
// type with the reference model.
module tb_congestion_analyzer;
  import wm_pkg::*;
  import wm_ref_pkg::*;

  logic        clk = 1'b0;
  block_t      blk;
  logic [3:0]  msb_sum;
  block_type_e btype;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  congestion_analyzer dut (.blk(blk), .msb_sum(msb_sum), .btype(btype));

  task automatic check_block(input logic [7:0] px [9]);
    int s;
    bit busy;
    for (int i = 0; i < 9; i++) blk[i] = px[i];
    @(posedge clk);
    s    = msb_count(px);
    busy = is_busy(s);
    checks += 2;
    if (int'(msb_sum) != s) begin
      failures++;
      $display("FAIL sum=%0d expected %0d", msb_sum, s);
    end
    if ((btype == BLK_DISORDERED) != busy) begin
      failures++;
      $display("FAIL S=%0d type=%s", s, btype.name());
    end
  endtask

  initial begin
    logic [7:0] px [9];
    // directed: the first s pixels bright, the rest dark
    for (int s = 0; s <= 9; s++) begin
      for (int i = 0; i < 9; i++) px[i] = rand_pix(i < s);
      check_block(px);
    end
    // random
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 9; i++) px[i] = 8'($urandom);
      check_block(px);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
