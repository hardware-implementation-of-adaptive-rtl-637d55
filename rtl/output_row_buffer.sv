// output_row_buffer: the three output row registers at the tail of the
// pipeline.
//
// When load is high the registers take a whole 3-line stripe at once:
// the watermarked lines from the stripe embedder, or, when bypass is high,
// the original lines unchanged. Bypass is used for a last stripe that has
// fewer than three image lines, which holds no whole block (this edge rule
// is this design's). The registered lines are then read out one per clock
// (rd_sel) for writing into the output image RAM, while the next stripe is
// being collected.
//
// Interface: load, bypass, rows_emb, rows_orig, rd_sel in; rd_row out.
// Timing: registered load; rd_row is a combinational select of the
// registers. Reset clears the registers.
module output_row_buffer
  import wm_pkg::*;
#(
  parameter int unsigned W = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic                    bypass,
  input  pixel_t [BLK-1:0][W-1:0] rows_emb,
  input  pixel_t [BLK-1:0][W-1:0] rows_orig,
  input  logic [1:0]              rd_sel,
  output pixel_t [W-1:0]          rd_row
);
  pixel_t [BLK-1:0][W-1:0] rows_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    rows_q <= '0;
    else if (load) rows_q <= bypass ? rows_orig : rows_emb;
  end

  always_comb begin
    rd_row = rows_q[0];
    if (rd_sel == 2'd1) rd_row = rows_q[1];
    if (rd_sel == 2'd2) rd_row = rows_q[2];
  end
endmodule
