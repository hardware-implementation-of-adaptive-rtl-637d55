// tb_wm_controller: runs the pipeline controller for images of 9, 10, 11
// and 3 lines (a whole number of stripes, and short last stripes of one
// and two lines) and checks every control output against the intended
// cycle schedule, including done exactly H+6 cycles after start.
module tb_wm_controller;
  logic clk = 1'b0, rst_n = 1'b0;
  int   c [4], f [4], b [4];
  logic fin [4];
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  ctrl_harness #(.H(9))  h0 (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .bypasses(b[0]), .finished(fin[0]));
  ctrl_harness #(.H(10)) h1 (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .bypasses(b[1]), .finished(fin[1]));
  ctrl_harness #(.H(11)) h2 (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .bypasses(b[2]), .finished(fin[2]));
  ctrl_harness #(.H(3))  h3 (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .bypasses(b[3]), .finished(fin[3]));

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    for (int i = 0; i < 4; i++) begin
      checks   += c[i];
      failures += f[i];
    end
    // short last stripes must have been bypassed (H=10 and H=11, two runs each)
    checks++;
    if (b[1] != 2 || b[2] != 2 || b[0] != 0 || b[3] != 0) begin
      failures++;
      $display("FAIL bypass counts %0d %0d %0d %0d", b[0], b[1], b[2], b[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
