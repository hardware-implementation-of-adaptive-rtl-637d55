// stripe_embedder: watermarks a stripe of three complete image lines at
// once, one block embedder per 3x3 block across the line.
//
// Column c of the line belongs to block c/3. A line of W pixels holds W/3
// whole blocks, each with its own watermark bit (wm_bits[b] for block b,
// counted from the left). When W is not a multiple of three the last one
// or two columns belong to no block and pass through unchanged; this edge
// rule is this design's choice.
//
// Interface: rows_in[r][c] is pixel c of line r of the stripe (r = 0 is
// the top line); rows_out has the same layout; btypes[b] is the type of
// block b (1 = disordered). Timing: combinational, one congestion
// analyzer plus one multiplexer level deep.
module stripe_embedder
  import wm_pkg::*;
#(
  parameter int unsigned W        = 256,
  parameter bit          ENHANCED = 1'b1,
  localparam int unsigned NB      = W / BLK
) (
  input  pixel_t [BLK-1:0][W-1:0] rows_in,
  input  logic   [NB-1:0]         wm_bits,
  output pixel_t [BLK-1:0][W-1:0] rows_out,
  output logic   [NB-1:0]         btypes
);
  for (genvar b = 0; b < NB; b++) begin : g_blk
    block_t      bin, bout;
    block_type_e bt;
    logic [3:0]  s_unused;

    for (genvar r = 0; r < BLK; r++) begin : g_r
      for (genvar k = 0; k < BLK; k++) begin : g_k
        assign bin[BLK*r+k]            = rows_in[r][BLK*b+k];
        assign rows_out[r][BLK*b+k]    = bout[BLK*r+k];
      end
    end

    block_embedder #(.ENHANCED(ENHANCED)) u_be (
      .blk_in(bin), .wm_bit(wm_bits[b]), .blk_out(bout), .btype(bt),
      .msb_sum(s_unused));

    assign btypes[b] = bt;
  end

  // columns past the last whole block
  for (genvar c = NB*BLK; c < W; c++) begin : g_edge
    for (genvar r = 0; r < BLK; r++) begin : g_r
      assign rows_out[r][c] = rows_in[r][c];
    end
  end
endmodule
