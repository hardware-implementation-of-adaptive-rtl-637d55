// tb_type_indicator: applies every count S = 0..9 that a 3x3 block can
// produce and checks that only 4, 5 and 6 are flagged disordered.
module tb_type_indicator;
  logic       clk = 1'b0;
  logic [3:0] sum;
  logic       dis;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  type_indicator dut (.sum(sum), .disordered(dis));

  initial begin
    for (int s = 0; s <= 9; s++) begin
      bit exp_dis;
      sum = 4'(s);
      @(posedge clk);
      exp_dis = (s >= 4) && (s <= 6);
      checks++;
      if (dis !== exp_dis) begin
        failures++;
        $display("FAIL S=%0d disordered=%b expected %b", s, dis, exp_dis);
      end
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
