// tb_psnr_compare: the enhanced method against the basic one on the same
// 256 x 256 image and watermark.
//
// Two embedders run side by side: one at its defaults (enhanced) and one
// with ENHANCED = 0 (basic). The image is synthetic: a smooth diagonal
// ramp in the left half and a busy pattern in the right half, with random
// low bits, so that both block types are frequent. The expected squared
// change of a pixel is 2*4^i for basic embedding and 1.5*4^i for enhanced
// embedding (i = 3 for plane 5, i = 1 for plane 3), so over many pixels the
// MSE ratio enhanced/basic should be close to 0.75 and the enhanced PSNR
// about 1.25 dB higher. The test checks both outputs against the reference
// model, that the MSE ratio lies in 0.70..0.80, and prints both PSNRs.
module tb_psnr_compare;
  import wm_pkg::*;
  import wm_ref_pkg::*;

  localparam int W = 256, H = 256, NB = W / 3, NGF = H / 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy_e, done_e, busy_b, done_b, img_we, wm_we, res_re;
  logic [7:0] img_waddr, res_raddr;
  logic [6:0] wm_waddr;
  pixel_t [W-1:0] img_wdata, res_e, res_b;
  logic [NB-1:0] wm_wdata;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  wm_top dut_enh (
    .clk, .rst_n, .start, .busy(busy_e), .done(done_e),
    .img_we, .img_waddr, .img_wdata, .wm_we, .wm_waddr, .wm_wdata,
    .res_re, .res_raddr, .res_rdata(res_e));

  wm_top #(.ENHANCED(1'b0)) dut_basic (
    .clk, .rst_n, .start, .busy(busy_b), .done(done_b),
    .img_we, .img_waddr, .img_wdata, .wm_we, .wm_waddr, .wm_wdata,
    .res_re, .res_raddr, .res_rdata(res_b));

  pixel_t        img [H][W];
  logic [NB-1:0] wm  [NGF];

  initial begin
    real se_e = 0.0, se_b = 0.0, ratio;
    int  n_dis = 0, n_ord = 0, cyc = 0;
    start = 1'b0; img_we = 1'b0; wm_we = 1'b0; res_re = 1'b0;
    img_waddr = '0; res_raddr = '0; wm_waddr = '0; img_wdata = '0; wm_wdata = '0;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        if (c < W / 2) img[r][c] = 8'((r + c) / 2 + ($urandom % 16));
        else           img[r][c] = 8'(((r / 2 + c / 3) % 2) * 140 + ($urandom % 100));
    for (int g = 0; g < NGF; g++) wm[g] = NB'({$urandom, $urandom, $urandom});
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int r = 0; r < H; r++) begin
      img_we = 1'b1; img_waddr = 8'(r);
      for (int c = 0; c < W; c++) img_wdata[c] = img[r][c];
      @(negedge clk);
    end
    img_we = 1'b0;
    for (int g = 0; g < NGF; g++) begin
      wm_we = 1'b1; wm_waddr = 7'(g); wm_wdata = wm[g];
      @(negedge clk);
    end
    wm_we = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!(done_e && done_b) && cyc < 1000) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (!(done_e && done_b)) failures++;
    @(negedge clk);
    for (int r = 0; r < H; r++) begin
      res_re = 1'b1; res_raddr = 8'(r);
      @(negedge clk);
      for (int c = 0; c < W; c++) begin
        se_e += (real'(res_e[c]) - real'(img[r][c])) ** 2;
        se_b += (real'(res_b[c]) - real'(img[r][c])) ** 2;
      end
      if (r < 3 * NGF) begin
        for (int c = 0; c < 3 * NB; c++) begin
          logic [7:0] px [9];
          bit busy_blk, w;
          for (int i = 0; i < 9; i++) px[i] = img[3 * (r / 3) + i / 3][3 * (c / 3) + i % 3];
          busy_blk = is_busy(msb_count(px));
          w = wm[r / 3][c / 3];
          if (r % 3 == 0 && c % 3 == 0) begin
            if (busy_blk) n_dis++; else n_ord++;
          end
          checks += 2;
          if (res_e[c] !== embed_pixel(img[r][c], w, busy_blk, 1'b1)) failures++;
          if (res_b[c] !== embed_pixel(img[r][c], w, busy_blk, 1'b0)) failures++;
        end
      end
    end
    res_re = 1'b0;
    ratio = se_e / se_b;
    $display("ordered blocks %0d, disordered blocks %0d", n_ord, n_dis);
    $display("basic    MSE %f PSNR %f dB", se_b / (W * H), 10.0 * $log10(255.0 * 255.0 * W * H / se_b));
    $display("enhanced MSE %f PSNR %f dB", se_e / (W * H), 10.0 * $log10(255.0 * 255.0 * W * H / se_e));
    $display("MSE ratio enhanced / basic %f (expected about 0.75)", ratio);
    checks += 2;
    if (ratio < 0.70 || ratio > 0.80) failures++;
    if (n_ord == 0 || n_dis == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
