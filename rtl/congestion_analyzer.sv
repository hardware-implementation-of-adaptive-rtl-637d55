// congestion_analyzer: classifies one 3x3 block as ordered (smooth) or
// disordered (busy) from the most significant bit-plane of its pixels.
//
// MSB extraction is wiring (bit 7 of each pixel); MSB summation is the
// 9:4 compressor (msb_compressor, five full adders and two half adders);
// the type indicator maps the count S to the block type, disordered for
// S in {4,5,6}. Embedding never touches bit 7, so the extractor sees the
// same classification on the watermarked block.
//
// Interface: blk = nine pixels P1..P9 (index 0 = P1); msb_sum = S;
// btype = BLK_DISORDERED / BLK_ORDERED. Timing: combinational.
module congestion_analyzer
  import wm_pkg::*;
(
  input  block_t      blk,
  output logic [3:0]  msb_sum,
  output block_type_e btype
);
  logic [8:0] msb;
  logic       dis;

  always_comb begin
    for (int i = 0; i < 9; i++) msb[i] = blk[i][PIX_W-1];
  end

  msb_compressor u_adder (.msb(msb), .sum(msb_sum));
  type_indicator u_type  (.sum(msb_sum), .disordered(dis));

  assign btype = block_type_e'(dis);
endmodule
