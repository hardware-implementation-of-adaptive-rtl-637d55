// tb_stripe_embedder: a stripe of three 11-pixel lines (three whole blocks
// plus two edge columns) with random pixels and watermark bits. Checks
// every output pixel against the reference model applied block by block,
// the per-block types, and that the edge columns pass unchanged.
module tb_stripe_embedder;
  import wm_pkg::*;
  import wm_ref_pkg::*;

  localparam int W  = 11;
  localparam int NB = W / 3;

  logic                    clk = 1'b0;
  pixel_t [2:0][W-1:0]     rows_in, rows_out;
  logic   [NB-1:0]         wm_bits, btypes;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  stripe_embedder #(.W(W)) dut (.rows_in(rows_in), .wm_bits(wm_bits),
                                .rows_out(rows_out), .btypes(btypes));

  initial begin
    for (int n = 0; n < 500; n++) begin
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < W; c++) rows_in[r][c] = 8'($urandom);
      wm_bits = NB'($urandom);
      @(posedge clk);
      for (int b = 0; b < NB; b++) begin
        logic [7:0] px [9];
        bit busy;
        for (int r = 0; r < 3; r++)
          for (int k = 0; k < 3; k++) px[3*r+k] = rows_in[r][3*b+k];
        busy = is_busy(msb_count(px));
        checks++;
        if (btypes[b] != busy) failures++;
        for (int r = 0; r < 3; r++)
          for (int k = 0; k < 3; k++) begin
            checks++;
            if (rows_out[r][3*b+k] !== embed_pixel(px[3*r+k], wm_bits[b], busy, 1'b1)) begin
              failures++;
              if (failures < 10) $display("FAIL block %0d r%0d k%0d", b, r, k);
            end
          end
      end
      for (int c = NB * 3; c < W; c++)
        for (int r = 0; r < 3; r++) begin
          checks++;
          if (rows_out[r][c] !== rows_in[r][c]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
