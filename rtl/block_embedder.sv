// block_embedder: watermarks one 3x3 block, the slice of the pipeline
// drawing that holds one congestion analyzer and nine embedding modules.
//
// The analyzer looks at the nine MSBs and the same block type and the same
// watermark bit go to all nine embedding modules, so a block carries one
// watermark bit (1/9 bit per pixel).
//
// Interface: blk_in (P1..P9, index 0 = P1), wm_bit in; blk_out, btype and
// msb_sum out. Timing: combinational.
module block_embedder
  import wm_pkg::*;
#(
  parameter bit ENHANCED = 1'b1
) (
  input  block_t      blk_in,
  input  logic        wm_bit,
  output block_t      blk_out,
  output block_type_e btype,
  output logic [3:0]  msb_sum
);
  congestion_analyzer u_ca (.blk(blk_in), .msb_sum(msb_sum), .btype(btype));

  for (genvar i = 0; i < 9; i++) begin : g_emb
    embedding_module #(.ENHANCED(ENHANCED)) u_em (
      .pix_in(blk_in[i]), .wm_bit(wm_bit), .btype(btype), .pix_out(blk_out[i]));
  end
endmodule
