// cla: W-bit carry look-ahead adder.
// Every carry is formed directly from the generate (g = x & y) and propagate
// (p = x ^ y) signals and cin as a two-level sum of products,
//   c[i+1] = g[i] | p[i]g[i-1] | ... | p[i]..p[1]g[0] | p[i]..p[0]cin,
// so no carry waits for the one below it. Meant for the short groups of the
// region-3 BEC carry look-ahead adder (a few bits each), where this single
// level of look-ahead stays small. Purely combinational.
module cla #(
  parameter int W = 4
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout
);
  logic [W-1:0] g, p;
  logic [W:0]   c;

  always_comb begin
    logic term;
    g = x & y;
    p = x ^ y;
    c = '0;
    c[0] = cin;
    for (int i = 0; i < W; i++) begin
      // carry into bit i+1
      term = cin;
      for (int k = 0; k <= i; k++) term &= p[k];
      c[i+1] = term;
      for (int j = 0; j <= i; j++) begin
        term = g[j];
        for (int k = j + 1; k <= i; k++) term &= p[k];
        c[i+1] |= term;
      end
    end
    s    = p ^ c[W-1:0];
    cout = c[W];
  end
endmodule
