// hybrid_cpa: the optimal hybrid final carry propagate adder of an N x N
// parallel multiplier.
//
// The bits leaving a Dadda tree do not arrive together: the low columns are
// ready early and one after another, the middle columns arrive late and
// almost together, and the top columns are ready somewhat earlier again. The
// 2N-bit adder is therefore split into three regions, each with the adder
// type that suits its arrival profile, chained by their carries:
//   region 1, bits [R1-1:0],        R1 = N/2:        ripple carry adder (rca)
//   region 2, bits [R1+R2-1:R1],    R2 = N + 2^x:    BEC carry select (bcsla)
//   region 3, bits [2N-1:R1+R2],    R3 = N/4:        BEC carry look-ahead (bcla)
// with x = floor(log2 N) - 2, so R2 = 5N/4 when N is a power of two and the
// three widths add up to 2N. For other N this design gives region 2 whatever
// regions 1 and 3 leave. Region 1 has carry in 0; the carry out of region 3
// is the extra output bit (always 0 when the inputs are the two rows of a
// product). Purely combinational; c_r1 and c_r2 are the carries between the
// regions.
module hybrid_cpa
  import cpa_pkg::*;
#(
  parameter int N = 64
) (
  input  logic [2*N-1:0] x,
  input  logic [2*N-1:0] y,
  output logic [2*N-1:0] s,
  output logic           cout
);
  localparam int R1 = region1_width(N);
  localparam int R2 = region2_width(N);
  localparam int R3 = region3_width(N);

  if (N < 4) begin : g_bad_n
    $error("hybrid_cpa: N must be at least 4");
  end
  if ((N & (N - 1)) == 0 && R2 != region2_formula(N)) begin : g_bad_r2
    $error("hybrid_cpa: region 2 width %0d differs from N + 2^x", R2);
  end

  logic c_r1;   // carry from region 1 into region 2
  logic c_r2;   // carry from region 2 into region 3

  rca #(.W(R1)) u_region1 (
    .x   (x[R1-1:0]),
    .y   (y[R1-1:0]),
    .cin (1'b0),
    .s   (s[R1-1:0]),
    .cout(c_r1)
  );

  bcsla #(.W(R2)) u_region2 (
    .x   (x[R1 +: R2]),
    .y   (y[R1 +: R2]),
    .cin (c_r1),
    .s   (s[R1 +: R2]),
    .cout(c_r2)
  );

  bcla #(.W(R3)) u_region3 (
    .x   (x[R1+R2 +: R3]),
    .y   (y[R1+R2 +: R3]),
    .cin (c_r2),
    .s   (s[R1+R2 +: R3]),
    .cout(cout)
  );
endmodule
