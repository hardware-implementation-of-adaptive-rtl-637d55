// embedding_module: writes one watermark bit into one pixel.
//
// The block type from the congestion analyzer selects the bit-plane:
// plane 5 (bit 4) for a disordered block, plane 3 (bit 2) for an ordered
// one. With ENHANCED = 1 (the enhanced adaptive method, the default) the
// inverted watermark bit is also written one plane lower, plane 4 or
// plane 2, which lowers the expected squared error from 2*4^i to 1.5*4^i.
// The hardware is four 2:1 multiplexers on bits 4..1, each choosing
// between the original bit and the watermark bit (or its inverse); bits
// 7..5 and bit 0 pass unchanged. With ENHANCED = 0 (the basic adaptive
// method) only the two multiplexers on bits 4 and 2 remain.
//
// Interface: pix_in, wm_bit, btype in; pix_out out. Timing: combinational.
module embedding_module
  import wm_pkg::*;
#(
  parameter bit ENHANCED = 1'b1
) (
  input  pixel_t      pix_in,
  input  logic        wm_bit,
  input  block_type_e btype,
  output pixel_t      pix_out
);
  logic sel;
  assign sel = (btype == BLK_DISORDERED);

  always_comb begin
    pix_out = pix_in;
    // plane 5: watermark when disordered
    pix_out[BIT_DIS] = sel ? wm_bit : pix_in[BIT_DIS];
    // plane 3: watermark when ordered
    pix_out[BIT_ORD] = sel ? pix_in[BIT_ORD] : wm_bit;
    if (ENHANCED) begin
      // plane 4: inverted watermark when disordered
      pix_out[BIT_DIS_ENH] = sel ? ~wm_bit : pix_in[BIT_DIS_ENH];
      // plane 2: inverted watermark when ordered
      pix_out[BIT_ORD_ENH] = sel ? pix_in[BIT_ORD_ENH] : ~wm_bit;
    end
  end
endmodule
