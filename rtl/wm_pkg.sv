// wm_pkg: types and constants shared by the adaptive watermark embedder.
//
// Pixels are 8-bit grey levels. Bit-planes are numbered 1 (LSB) to 8 (MSB)
// as in the algorithm description, so plane k is bit k-1 of a pixel. A 3x3
// block is classified from the sum S of its nine MSBs: S in {4,5,6} is a
// "disordered" (busy) block, any other S is "ordered" (smooth). The
// watermark bit goes into plane 5 of every pixel of a disordered block and
// into plane 3 of an ordered one; the enhanced method also writes the
// inverted bit one plane lower (4 or 2).
package wm_pkg;

  localparam int unsigned PIX_W = 8;          // bits per pixel
  localparam int unsigned BLK   = 3;          // block edge, 3x3 blocks

  // bit indices (0-based) of the planes used, from the 1-based plane numbers
  localparam int unsigned PLANE_DIS     = 5;  // watermark plane, disordered block
  localparam int unsigned PLANE_ORD     = 3;  // watermark plane, ordered block
  localparam int unsigned BIT_DIS       = PLANE_DIS - 1;
  localparam int unsigned BIT_DIS_ENH   = PLANE_DIS - 2;
  localparam int unsigned BIT_ORD       = PLANE_ORD - 1;
  localparam int unsigned BIT_ORD_ENH   = PLANE_ORD - 2;

  typedef logic [PIX_W-1:0] pixel_t;

  // the nine pixels of a block, P1..P9 in raster order (index 0 = P1)
  typedef pixel_t [BLK*BLK-1:0] block_t;

  typedef enum logic {
    BLK_ORDERED    = 1'b0,
    BLK_DISORDERED = 1'b1
  } block_type_e;

endpackage
