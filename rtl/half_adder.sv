// half_adder: one-bit half adder, the 2:2 counter of the Dadda tree.
// s = x ^ y, co = x & y. Purely combinational.
module half_adder (
  input  logic x,
  input  logic y,
  output logic s,
  output logic co
);
  always_comb begin
    s  = x ^ y;
    co = x & y;
  end
endmodule
