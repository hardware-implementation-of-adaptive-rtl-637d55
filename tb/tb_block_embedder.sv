// tb_block_embedder: random and directed 3x3 blocks with both watermark
// values. Checks all nine output pixels against the reference model, the
// reported type, and that the watermark bit is recovered by the majority
// vote extractor from the output block.
module tb_block_embedder;
  import wm_pkg::*;
  import wm_ref_pkg::*;

  logic        clk = 1'b0;
  block_t      blk_in, blk_out;
  logic        wm_bit;
  block_type_e btype;
  logic [3:0]  msb_sum;
  int checks = 0, failures = 0;
  int n_busy = 0, n_smooth = 0;

  always #5 clk = ~clk;

  block_embedder dut (.blk_in(blk_in), .wm_bit(wm_bit), .blk_out(blk_out),
                      .btype(btype), .msb_sum(msb_sum));

  task automatic run(input logic [7:0] px [9], input bit w);
    logic [7:0] got [9];
    bit busy;
    for (int i = 0; i < 9; i++) blk_in[i] = px[i];
    wm_bit = w;
    @(posedge clk);
    busy = is_busy(msb_count(px));
    if (busy) n_busy++; else n_smooth++;
    for (int i = 0; i < 9; i++) begin
      got[i] = blk_out[i];
      checks++;
      if (got[i] !== embed_pixel(px[i], w, busy, 1'b1)) begin
        failures++;
        if (failures < 10) $display("FAIL P%0d in=%h got=%h", i + 1, px[i], got[i]);
      end
    end
    checks += 2;
    if ((btype == BLK_DISORDERED) != busy) failures++;
    if (extract(got) != w) begin
      failures++;
      $display("FAIL extraction w=%0d", w);
    end
  endtask

  initial begin
    logic [7:0] px [9];
    for (int s = 0; s <= 9; s++) begin
      for (int w = 0; w < 2; w++) begin
        for (int i = 0; i < 9; i++) px[i] = rand_pix(i >= 9 - s);
        run(px, w[0]);
      end
    end
    for (int n = 0; n < 1000; n++) begin
      for (int i = 0; i < 9; i++) px[i] = 8'($urandom);
      run(px, 1'($urandom));
    end
    if (n_busy == 0 || n_smooth == 0) failures++;
    $display("disordered blocks %0d, ordered blocks %0d", n_busy, n_smooth);
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
