// bec_mux: binary-to-excess-1 converter (BEC) with its output multiplexer,
// the carry-select stage of one group of a BEC carry select adder.
//
// A group first adds its bits with carry in 0, giving {c0, s0}. Instead of a
// second adder for carry in 1, the BEC forms {c0, s0} + 1 with W+1 XOR/AND
// stages, X[0] = ~B[0] and X[i] = B[i] ^ (B[i-1] & ... & B[0]), and a 2:1
// multiplexer picks one of the two results with the group's real carry in:
//   {cout, s} = sel ? {c0, s0} + 1 : {c0, s0}.
// Purely combinational; sel is the late-arriving signal.
module bec_mux #(
  parameter int W = 4
) (
  input  logic [W-1:0] s0,
  input  logic         c0,
  input  logic         sel,
  output logic [W-1:0] s,
  output logic         cout
);
  logic [W:0] bin, xs1;

  always_comb begin
    logic run;
    bin = {c0, s0};
    run = 1'b1;
    for (int i = 0; i <= W; i++) begin
      xs1[i] = bin[i] ^ run;
      run    = run & bin[i];
    end
    {cout, s} = sel ? xs1 : bin;
  end
endmodule
