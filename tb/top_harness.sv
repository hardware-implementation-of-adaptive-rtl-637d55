// top_harness: end-to-end test of one wm_top of W x H pixels.
//
// For each of two runs it builds an image block by block, choosing the
// number of bright MSBs (0..9) of every block at random so that every
// classification case occurs, writes the image and a random watermark
// through the host ports, starts the embedder, checks that done comes
// exactly H+6 cycles after start, reads the result back and compares every
// pixel with the reference model (edge columns and a short last stripe
// must come back unchanged). It then extracts the watermark from the
// result by majority vote and compares it with the one written.
// Mechanism counters: ordered / disordered blocks, each MSB count, edge
// pixels passed through, runs with a short last stripe passed through, runs where a line is
// read and another written in the same clock (pipeline overlap, inferred
// from a latency of H+6 for H lines read and H lines written).
module top_harness #(
  parameter int W   = 11,
  parameter int H   = 10,
  parameter bit ENH = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   n_ordered,
  output int   n_disordered,
  output int   n_edge_px,
  output int   n_bypass,
  output int   n_overlap,
  output int   n_sum_seen,
  output logic finished
);
  import wm_pkg::*;
  import wm_ref_pkg::*;

  localparam int NB  = W / 3;
  localparam int NGF = (H / 3 > 0) ? H / 3 : 1;
  localparam int AW  = (H > 1) ? $clog2(H) : 1;
  localparam int GW  = (NGF > 1) ? $clog2(NGF) : 1;

  logic               start, busy, done;
  logic               img_we, wm_we, res_re;
  logic [AW-1:0]      img_waddr, res_raddr;
  logic [GW-1:0]      wm_waddr;
  pixel_t [W-1:0]     img_wdata, res_rdata;
  logic [NB-1:0]      wm_wdata;

  wm_top #(.IMG_W(W), .IMG_H(H), .ENHANCED(ENH)) dut (
    .clk, .rst_n, .start, .busy, .done,
    .img_we, .img_waddr, .img_wdata,
    .wm_we, .wm_waddr, .wm_wdata,
    .res_re, .res_raddr, .res_rdata);

  pixel_t          img [H][W];
  pixel_t          res [H][W];
  logic [NB-1:0]   wm  [NGF];
  bit              sum_seen [10];


  task automatic fail(input string msg);
    failures++;
    if (failures < 10) $display("FAIL W=%0d H=%0d ENH=%0d: %s", W, H, ENH, msg);
  endtask

  task automatic make_image();
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) img[r][c] = 8'($urandom);
    for (int g = 0; g < H / 3; g++)
      for (int b = 0; b < NB; b++) begin
        int s = $urandom % 10;
        bit m [9];
        // s bright pixels at random places
        for (int i = 0; i < 9; i++) m[i] = (i < s);
        for (int i = 8; i > 0; i--) begin
          int j = $urandom % (i + 1);
          bit t = m[i]; m[i] = m[j]; m[j] = t;
        end
        for (int i = 0; i < 9; i++) img[3*g + i/3][3*b + i%3][7] = m[i];
      end
    for (int g = 0; g < NGF; g++) wm[g] = NB'($urandom);
  endtask

  task automatic load_and_run();
    int cyc;
    @(negedge clk);
    for (int r = 0; r < H; r++) begin
      img_we = 1'b1; img_waddr = AW'(r);
      for (int c = 0; c < W; c++) img_wdata[c] = img[r][c];
      @(negedge clk);
    end
    img_we = 1'b0;
    for (int g = 0; g < H / 3; g++) begin
      wm_we = 1'b1; wm_waddr = GW'(g); wm_wdata = wm[g];
      @(negedge clk);
    end
    wm_we = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done && cyc < 10 * H + 50) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != H + 6) fail($sformatf("done after %0d cycles, expected %0d", cyc, H + 6));
    // H lines read and H lines written in H+6 cycles: reading and writing overlapped
    if (cyc == H + 6 && H > 6) n_overlap++;
    @(negedge clk);
    checks++;
    if (busy) fail("busy after done");
    for (int r = 0; r < H; r++) begin
      res_re = 1'b1; res_raddr = AW'(r);
      @(negedge clk);
      for (int c = 0; c < W; c++) res[r][c] = res_rdata[c];
    end
    res_re = 1'b0;
  endtask

  task automatic check_result();
    bit short_ok = (H % 3 != 0);
    for (int g = 0; g < H / 3; g++)
      for (int b = 0; b < NB; b++) begin
        logic [7:0] px [9], got [9];
        bit busy_blk, w;
        int s;
        for (int i = 0; i < 9; i++) begin
          px[i]  = img[3*g + i/3][3*b + i%3];
          got[i] = res[3*g + i/3][3*b + i%3];
        end
        s = msb_count(px);
        sum_seen[s] = 1'b1;
        busy_blk = is_busy(s);
        w = wm[g][b];
        if (busy_blk) n_disordered++; else n_ordered++;
        for (int i = 0; i < 9; i++) begin
          checks++;
          if (got[i] !== embed_pixel(px[i], w, busy_blk, ENH))
            fail($sformatf("stripe %0d block %0d P%0d in=%h got=%h", g, b, i + 1, px[i], got[i]));
        end
        checks++;
        if (extract(got) != w) fail($sformatf("extracted bit of stripe %0d block %0d", g, b));
      end
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        if (r >= 3 * (H / 3) || c >= 3 * NB) begin
          n_edge_px++;
          checks++;
          if (res[r][c] !== img[r][c]) begin
            fail($sformatf("edge pixel (%0d,%0d) changed", r, c));
            short_ok = 1'b0;
          end
        end
    if (short_ok) n_bypass++;
  endtask

  initial begin
    checks = 0; failures = 0; n_ordered = 0; n_disordered = 0; n_edge_px = 0;
    n_bypass = 0; n_overlap = 0; n_sum_seen = 0; finished = 1'b0;
    start = 1'b0; img_we = 1'b0; wm_we = 1'b0; res_re = 1'b0;
    img_waddr = '0; res_raddr = '0; wm_waddr = '0; img_wdata = '0; wm_wdata = '0;
    @(posedge rst_n);
    for (int run = 0; run < 2; run++) begin
      make_image();
      load_and_run();
      check_result();
    end
    foreach (sum_seen[s]) if (sum_seen[s]) n_sum_seen++;
    finished = 1'b1;
  end
endmodule
