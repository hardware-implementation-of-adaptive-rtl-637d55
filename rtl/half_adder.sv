// half_adder: one-bit half adder used in the last rank of the 9:4 MSB
// compressor. Purely combinational: sum = a^b, carry = a&b.
module half_adder (
  input  logic a,
  input  logic b,
  output logic s,
  output logic co
);
  always_comb begin
    s  = a ^ b;
    co = a & b;
  end
endmodule
