// tb_msb_compressor: exhaustive check of the 9:4 MSB compressor. All 512
// input patterns are applied and the 4-bit sum is compared with the number
// of ones counted by a loop.
module tb_msb_compressor;
  logic       clk = 1'b0;
  logic [8:0] msb;
  logic [3:0] sum;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  msb_compressor dut (.msb(msb), .sum(sum));

  initial begin
    for (int v = 0; v < 512; v++) begin
      int ones;
      msb = 9'(v);
      ones = 0;
      @(posedge clk);
      for (int b = 0; b < 9; b++) ones += (v >> b) & 1;
      checks++;
      if (int'(sum) != ones) begin
        failures++;
        if (failures < 10) $display("FAIL msb=%b sum=%0d expected %0d", msb, sum, ones);
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
