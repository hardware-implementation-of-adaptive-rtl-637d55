// msb_compressor: the "9-bit adder" of the congestion analyzer, a 9:4
// compressor that counts the ones among the nine MSBs of a 3x3 block.
//
// It uses five full adders and two half adders, the cell count the design
// calls for. Rank 1: three full adders reduce the inputs in groups of
// three to three weight-1 sums and three weight-2 carries. Rank 2: one full
// adder adds the three weight-1 sums (giving bit 0 of S and a weight-2
// carry), another adds the three weight-2 carries (giving a weight-2 sum
// and a weight-4 carry). Rank 3: a half adder merges the two weight-2
// signals into bit 1, and a second half adder merges the two weight-4
// signals into bits 2 and 3. This grouping is this design's reading of the
// wiring drawing; any grouping with this cell count gives the same S.
//
// Interface: msb[8:0] in, sum[3:0] = popcount(msb) out, range 0..9.
// Timing: combinational, three adder levels deep.
module msb_compressor (
  input  logic [8:0] msb,
  output logic [3:0] sum
);
  logic [2:0] s1, c1;          // rank-1 sums (weight 1) and carries (weight 2)
  logic       s2a, c2a;        // weight-1 sum / weight-2 carry of rank-2 FA on s1
  logic       s2b, c2b;        // weight-2 sum / weight-4 carry of rank-2 FA on c1
  logic       c3a;             // weight-4 carry of the first half adder

  for (genvar g = 0; g < 3; g++) begin : g_rank1
    full_adder u_fa (.a(msb[3*g]), .b(msb[3*g+1]), .ci(msb[3*g+2]),
                     .s(s1[g]), .co(c1[g]));
  end

  full_adder u_fa_sum   (.a(s1[0]), .b(s1[1]), .ci(s1[2]), .s(s2a), .co(c2a));
  full_adder u_fa_carry (.a(c1[0]), .b(c1[1]), .ci(c1[2]), .s(s2b), .co(c2b));

  half_adder u_ha_w2 (.a(c2a), .b(s2b), .s(sum[1]), .co(c3a));
  half_adder u_ha_w4 (.a(c2b), .b(c3a), .s(sum[2]), .co(sum[3]));

  assign sum[0] = s2a;
endmodule
