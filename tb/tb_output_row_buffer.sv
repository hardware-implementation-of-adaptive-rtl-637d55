// tb_output_row_buffer: loads random 3-line stripes, with and without
// bypass, holds them while load is low, and reads all three lines back
// through rd_sel, comparing with the stripe that should have been taken.
module tb_output_row_buffer;
  import wm_pkg::*;

  localparam int W = 5;

  logic                clk = 1'b0, rst_n = 1'b0;
  logic                load, bypass;
  pixel_t [2:0][W-1:0] rows_emb, rows_orig, expect_q;
  logic [1:0]          rd_sel;
  pixel_t [W-1:0]      rd_row;
  int checks = 0, failures = 0, n_bypass = 0;

  always #5 clk = ~clk;

  output_row_buffer #(.W(W)) dut (.clk, .rst_n, .load, .bypass, .rows_emb,
                                  .rows_orig, .rd_sel, .rd_row);

  initial begin
    load = 1'b0; bypass = 1'b0; rows_emb = '0; rows_orig = '0; rd_sel = '0;
    expect_q = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      load   = ($urandom % 3) != 0;
      bypass = ($urandom % 4) == 0;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < W; c++) begin
          rows_emb[r][c]  = 8'($urandom);
          rows_orig[r][c] = 8'($urandom);
        end
      @(posedge clk);
      if (load) begin
        expect_q = bypass ? rows_orig : rows_emb;
        if (bypass) n_bypass++;
      end
      @(negedge clk);
      load = 1'b0;
      for (int s = 0; s < 3; s++) begin
        rd_sel = 2'(s);
        #1;
        checks++;
        if (rd_row !== expect_q[s]) begin
          failures++;
          if (failures < 10) $display("FAIL step %0d line %0d", n, s);
        end
      end
    end
    if (n_bypass == 0) failures++;
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
