// tb_wm_top: end-to-end tests of the watermark embedder at small image
// sizes: 11x10 enhanced (two edge columns, a one-line last stripe),
// 9x9 basic (no edges), 12x11 enhanced (a two-line last stripe) and
// 30x30 enhanced. Each harness runs two complete images. The testbench
// fails unless every mechanism was exercised: ordered and disordered
// blocks, all ten MSB counts, edge pass-through, short-stripe bypass, and
// overlapped reading and writing.
module tb_wm_top;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  int   c [N], f [N], n_ord [N], n_dis [N], n_edge [N], n_byp [N], n_ovl [N], n_sums [N];
  logic fin [N];
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  top_harness #(.W(11), .H(10), .ENH(1'b1)) h0 (.clk, .rst_n, .checks(c[0]), .failures(f[0]),
    .n_ordered(n_ord[0]), .n_disordered(n_dis[0]), .n_edge_px(n_edge[0]), .n_bypass(n_byp[0]),
    .n_overlap(n_ovl[0]), .n_sum_seen(n_sums[0]), .finished(fin[0]));
  top_harness #(.W(9), .H(9), .ENH(1'b0)) h1 (.clk, .rst_n, .checks(c[1]), .failures(f[1]),
    .n_ordered(n_ord[1]), .n_disordered(n_dis[1]), .n_edge_px(n_edge[1]), .n_bypass(n_byp[1]),
    .n_overlap(n_ovl[1]), .n_sum_seen(n_sums[1]), .finished(fin[1]));
  top_harness #(.W(12), .H(11), .ENH(1'b1)) h2 (.clk, .rst_n, .checks(c[2]), .failures(f[2]),
    .n_ordered(n_ord[2]), .n_disordered(n_dis[2]), .n_edge_px(n_edge[2]), .n_bypass(n_byp[2]),
    .n_overlap(n_ovl[2]), .n_sum_seen(n_sums[2]), .finished(fin[2]));
  top_harness #(.W(30), .H(30), .ENH(1'b1)) h3 (.clk, .rst_n, .checks(c[3]), .failures(f[3]),
    .n_ordered(n_ord[3]), .n_disordered(n_dis[3]), .n_edge_px(n_edge[3]), .n_bypass(n_byp[3]),
    .n_overlap(n_ovl[3]), .n_sum_seen(n_sums[3]), .finished(fin[3]));

  task automatic need(input string what, input int count);
    checks++;
    $display("mechanism %-28s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    int ord = 0, dis = 0, edge_px = 0, byp = 0, ovl = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    for (int i = 0; i < N; i++) begin
      checks += c[i]; failures += f[i];
      ord += n_ord[i]; dis += n_dis[i]; edge_px += n_edge[i]; byp += n_byp[i]; ovl += n_ovl[i];
    end
    need("ordered blocks (plane 3)", ord);
    need("disordered blocks (plane 5)", dis);
    need("edge pixels passed through", edge_px);
    need("runs with short stripe bypassed", byp);
    need("runs with read/write overlap", ovl);
    need("basic method run", n_ord[1] + n_dis[1]);
    checks++;
    $display("MSB counts seen in the 30x30 image: %0d of 10", n_sums[3]);
    if (n_sums[3] != 10) failures++;
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
