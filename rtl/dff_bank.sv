// dff_bank: a bank of W positive-edge D flip-flops.
// The multiplier is measured and used between flip-flops: one bank captures
// the multiplicand, one the multiplier and one the 2N-bit product, all on the
// same clock. q takes the value of d at every rising edge of clk. There is no
// reset and no enable, as the flip-flops are drawn with a clock input only;
// that choice is this design's, the registers themselves follow the paper's
// measurement set-up.
module dff_bank #(
  parameter int W = 64
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  always_ff @(posedge clk) q <= d;
endmodule
