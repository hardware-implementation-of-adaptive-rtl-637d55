// line_buffer: the three input row registers at the head of the pipeline.
//
// One image line arrives per clock from the input image RAM and is stored
// in register row_sel (0, 1, 2 for the first, second and third line of the
// current 3-line stripe). After the third load the stripe is complete and
// the stripe embedder sees all nine pixels of every block. Loading by index
// rather than shifting keeps each line in a fixed register, as in the
// pipeline drawing (Row 1, Row 2, Row 3); the choice is this design's.
//
// Interface: load, row_sel, row_in in; rows out (rows[r][c]).
// Timing: a load at a rising edge is visible on rows from the next cycle.
// Reset clears the registers.
module line_buffer
  import wm_pkg::*;
#(
  parameter int unsigned W = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic [1:0]              row_sel,
  input  pixel_t [W-1:0]          row_in,
  output pixel_t [BLK-1:0][W-1:0] rows
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rows <= '0;
    end else if (load) begin
      rows[row_sel] <= row_in;
    end
  end

  a_sel_range: assert property (@(posedge clk) disable iff (!rst_n)
                                load |-> int'(row_sel) < BLK)
    else $error("line_buffer: row_sel out of range");
endmodule
