// tb_sync_ram: random writes and reads against a shadow array. Checks the
// one-cycle read latency, that rdata holds while re is low, and
// read-before-write on a same-address collision.
module tb_sync_ram;
  localparam int DW = 12, DEPTH = 10, AW = 4;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          we, re;
  logic [AW-1:0] waddr, raddr;
  logic [DW-1:0] wdata, rdata, expect_q;
  logic [DW-1:0] shadow [DEPTH];
  int checks = 0, failures = 0, n_coll = 0;

  always #5 clk = ~clk;

  sync_ram #(.DW(DW), .DEPTH(DEPTH)) dut (.clk, .rst_n, .we, .waddr, .wdata,
                                         .re, .raddr, .rdata);

  initial begin
    we = 1'b0; re = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = DW'($urandom);
      shadow[a] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    expect_q = '0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      we    = ($urandom % 2) == 1;
      re    = ($urandom % 3) != 0;
      waddr = AW'($urandom % DEPTH);
      raddr = (($urandom % 4) == 0) ? waddr : AW'($urandom % DEPTH);
      wdata = DW'($urandom);
      if (re) expect_q = shadow[raddr];   // old word on collision
      if (re && we && raddr == waddr) n_coll++;
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d rdata=%h exp %h", n, rdata, expect_q);
      end
    end
    if (n_coll == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
