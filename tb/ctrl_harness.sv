// ctrl_harness: drives one wm_controller of H lines through two runs and
// compares every control output, cycle by cycle, with the schedule the
// embedder is meant to follow (cycle 0 = start high):
//   input RAM read of line j in cycle j+1, watermark read of stripe g in
//   cycle 3g+3, line buffer load of line j in cycle j+2 at slot j%3,
//   output row buffer load of stripe g in cycle 3g+5 (bypass when the
//   stripe is short), output write of line j in cycle j+6 from slot j%3,
//   done in cycle H+6, busy in cycles 1..H+5.
// Reports its counts on checks / failures / bypasses when finished is high.
module ctrl_harness #(
  parameter int H = 9
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   bypasses,
  output logic finished
);
  localparam int AW = (H > 1) ? $clog2(H) : 1;
  localparam int NGF = (H / 3 > 0) ? H / 3 : 1;
  localparam int GW = (NGF > 1) ? $clog2(NGF) : 1;
  localparam int NG = (H + 2) / 3;

  logic          start, busy, done, in_re, wm_re, lb_load, ob_load, ob_bypass, out_we;
  logic [AW-1:0] in_raddr, out_waddr;
  logic [GW-1:0] wm_raddr;
  logic [1:0]    lb_sel, ob_sel;

  wm_controller #(.H(H)) dut (
    .clk, .rst_n, .start, .busy, .done, .in_re, .in_raddr, .wm_re, .wm_raddr,
    .lb_load, .lb_sel, .ob_load, .ob_bypass, .ob_sel, .out_we, .out_waddr);

  task automatic expect_bit(input string what, input int k, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL H=%0d cycle %0d %s=%b expected %b", H, k, what, got, exp);
    end
  endtask

  task automatic expect_val(input string what, input int k, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL H=%0d cycle %0d %s=%0d expected %0d", H, k, what, got, exp);
    end
  endtask

  initial begin
    checks = 0; failures = 0; bypasses = 0; finished = 1'b0;
    start = 1'b0;
    @(posedge rst_n);
    for (int run = 0; run < 2; run++) begin
      repeat (3) @(negedge clk);
      start = 1'b1;
      for (int k = 0; k <= H + 10; k++) begin
        // sample just before the rising edge that ends cycle k
        #4;
        begin
          int j_rd, j_lb, j_wr;
          bit e_in, e_wm, e_lb, e_ob, e_byp, e_wr;
          j_rd  = k - 1;
          j_lb  = k - 2;
          j_wr  = k - 6;
          e_in  = (j_rd >= 0) && (j_rd < H);
          e_wm  = e_in && (j_rd % 3 == 2);
          e_lb  = (j_lb >= 0) && (j_lb < H);
          e_ob  = (k >= 5) && ((k - 5) % 3 == 0) && ((k - 5) / 3 < NG);
          e_byp = e_ob && (3 * ((k - 5) / 3) + 2 >= H);
          e_wr  = (j_wr >= 0) && (j_wr < H);
          expect_bit("busy", k, busy, (k >= 1) && (k <= H + 5));
          expect_bit("done", k, done, k == H + 6);
          expect_bit("in_re", k, in_re, e_in);
          if (e_in) expect_val("in_raddr", k, int'(in_raddr), j_rd);
          expect_bit("wm_re", k, wm_re, e_wm);
          if (e_wm) expect_val("wm_raddr", k, int'(wm_raddr), j_rd / 3);
          expect_bit("lb_load", k, lb_load, e_lb);
          if (e_lb) expect_val("lb_sel", k, int'(lb_sel), j_lb % 3);
          expect_bit("ob_load", k, ob_load, e_ob);
          if (e_ob) expect_bit("ob_bypass", k, ob_bypass, e_byp);
          if (e_ob && ob_bypass) bypasses++;
          expect_bit("out_we", k, out_we, e_wr);
          if (e_wr) begin
            expect_val("out_waddr", k, int'(out_waddr), j_wr);
            expect_val("ob_sel", k, int'(ob_sel), j_wr % 3);
          end
        end
        @(negedge clk);
        // a second start while busy must be ignored
        start = (k == 2);
      end
      start = 1'b0;
    end
    finished = 1'b1;
  end
endmodule
