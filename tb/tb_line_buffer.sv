// tb_line_buffer: loads random lines into the three registers in random
// order, with idle cycles, and checks after every edge that exactly the
// addressed register changed (against a shadow copy).
module tb_line_buffer;
  import wm_pkg::*;

  localparam int W = 7;

  logic                clk = 1'b0, rst_n = 1'b0;
  logic                load;
  logic [1:0]          row_sel;
  pixel_t [W-1:0]      row_in;
  pixel_t [2:0][W-1:0] rows, shadow;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  line_buffer #(.W(W)) dut (.clk, .rst_n, .load, .row_sel, .row_in, .rows);

  initial begin
    load = 1'b0; row_sel = '0; row_in = '0; shadow = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++;
    if (rows !== shadow) failures++;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      load    = ($urandom % 4) != 0;
      row_sel = 2'($urandom % 3);
      for (int c = 0; c < W; c++) row_in[c] = 8'($urandom);
      @(posedge clk);
      if (load) shadow[row_sel] = row_in;
      #1;
      checks++;
      if (rows !== shadow) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d sel=%0d", n, row_sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
