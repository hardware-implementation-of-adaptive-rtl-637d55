// type_indicator: decides from the MSB count S of a 3x3 block whether the
// block is disordered (S in {4,5,6}, output 1) or ordered (S in
// {0,1,2,3,7,8,9}, output 0).
//
// With S = s3 s2 s1 s0 in the range 0..9 the set {4,5,6} is exactly
// "s3 = 0, s2 = 1 and not (s1 = 1 and s0 = 1)", i.e. three gates: an
// inverter on s3, a NAND of s1 and s0, and a three-input AND. The set is
// the algorithm's; the Boolean form is derived here from the set.
//
// Interface: sum[3:0] in (values 10..15 never occur), disordered out.
// Timing: combinational.
module type_indicator (
  input  logic [3:0] sum,
  output logic       disordered
);
  logic n_s3, nand_s1s0;
  always_comb begin
    n_s3       = ~sum[3];
    nand_s1s0  = ~(sum[1] & sum[0]);
    disordered = n_s3 & sum[2] & nand_s1s0;
  end
endmodule
