// wm_ref_pkg: reference model of the watermarking algorithm for the
// testbenches, written from the algorithm (counts and bit-plane numbers),
// not from the RTL structure.
//
//   msb_count  : number of pixels of a block with value >= 128
//   is_busy    : count in {4,5,6}
//   embed_pixel: set plane k (value 2^(k-1)) to w, and in the enhanced
//                method plane k-1 to not w; k = 5 for busy blocks, 3 else
//   extract    : majority vote (> 4 of 9) on the plane the block type names
package wm_ref_pkg;

  function automatic int msb_count(input logic [7:0] px [9]);
    int n = 0;
    foreach (px[i]) if (px[i] >= 8'd128) n++;
    return n;
  endfunction

  function automatic bit is_busy(input int s);
    return (s == 4) || (s == 5) || (s == 6);
  endfunction

  // value with plane k (1-based) forced to v
  function automatic logic [7:0] set_plane(input logic [7:0] x, input int k, input bit v);
    int unsigned weight = 1 << (k - 1);
    int unsigned y = x;
    if (((y / weight) % 2) == 1) y = y - weight;
    if (v) y = y + weight;
    return y[7:0];
  endfunction

  function automatic logic [7:0] embed_pixel(input logic [7:0] x, input bit w,
                                              input bit busy, input bit enh);
    int k = busy ? 5 : 3;
    logic [7:0] y = set_plane(x, k, w);
    if (enh) y = set_plane(y, k - 1, !w);
    return y;
  endfunction

  function automatic bit extract(input logic [7:0] px [9]);
    int k = is_busy(msb_count(px)) ? 5 : 3;
    int ones = 0;
    foreach (px[i]) if (((int'(px[i]) >> (k - 1)) & 1) == 1) ones++;
    return ones > 4;
  endfunction

  // a random pixel whose MSB is given
  function automatic logic [7:0] rand_pix(input bit msb);
    logic [7:0] v = 8'($urandom);
    v[7] = msb;
    return v;
  endfunction

endpackage
