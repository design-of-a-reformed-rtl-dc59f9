// full_adder: one-bit full adder, the cell of both the carry-save row and the
// ripple-carry row of the multiplier's adders. Purely combinational.
module full_adder (
  input  logic x,
  input  logic y,
  input  logic ci,
  output logic s,
  output logic co
);
  always_comb begin
    s  = x ^ y ^ ci;
    co = (x & y) | (x & ci) | (y & ci);
  end
endmodule
