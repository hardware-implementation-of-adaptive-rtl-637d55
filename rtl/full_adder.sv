// full_adder: one-bit full adder, the cell from which the 9:4 MSB
// compressor is built. Purely combinational: sum = a^b^ci, carry = majority.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s,
  output logic co
);
  always_comb begin
    s  = a ^ b ^ ci;
    co = (a & b) | (a & ci) | (b & ci);
  end
endmodule
