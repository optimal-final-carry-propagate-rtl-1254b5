// and_array: the N x N AND gate array that forms the partial-product matrix
// of an unsigned N x N multiplier.
// pp[i][j] = b[i] & a[j] carries weight 2^(i+j). Purely combinational; the
// paper's fan-out buffers in front of the array are wires here.
module and_array #(
  parameter int N = 64
) (
  input  logic [N-1:0]          a,
  input  logic [N-1:0]          b,
  output logic [N-1:0][N-1:0]   pp
);
  for (genvar i = 0; i < N; i++) begin : g_row
    assign pp[i] = a & {N{b[i]}};
  end
endmodule
