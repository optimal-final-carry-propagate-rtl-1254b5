// full_adder: one-bit full adder, the 3:2 counter of the Dadda tree and the
// cell of every ripple carry adder in this design.
// s = x ^ y ^ ci, co = majority(x, y, ci). Purely combinational.
module full_adder (
  input  logic x,
  input  logic y,
  input  logic ci,
  output logic s,
  output logic co
);
  always_comb begin
    s  = x ^ y ^ ci;
    co = (x & y) | (ci & (x ^ y));
  end
endmodule
