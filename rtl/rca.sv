// rca: W-bit ripple carry adder built from full_adder cells.
// {cout, s} = x + y + cin, the carry passing bit by bit from the LSB.
// In the hybrid final adder it forms region 1 (the low N/2 bits, whose inputs
// arrive early and one after another, so a rippling carry keeps up with them)
// and, with cin tied to 0, the adder inside each group of the region-2 BEC
// carry select adder. Purely combinational.
module rca #(
  parameter int W = 32
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout
);
  logic [W:0] c;
  assign c[0] = cin;
  for (genvar i = 0; i < W; i++) begin : g_bit
    full_adder u_fa (.x(x[i]), .y(y[i]), .ci(c[i]), .s(s[i]), .co(c[i+1]));
  end
  assign cout = c[W];
endmodule
