// bcsla: W-bit variable-block BEC carry select adder (BCSLA), region 2 of the
// hybrid final adder.
//
// The W bits are cut into groups whose sizes follow the square-root rule
// (cpa_pkg::group_size: 2, 3, 4, ... bits from the LSB up, leftover bits
// spread over the top groups). Each group adds its own bits at once with a
// ripple carry adder whose carry in is 0, and a bec_mux then chooses between
// that result and the result plus one when the real carry into the group
// arrives. The only serial path is therefore one multiplexer per group, while
// larger groups towards the MSB have more time to finish their ripple.
// Timing: combinational; cin is the carry out of region 1, cout feeds
// region 3.
module bcsla
  import cpa_pkg::*;
#(
  parameter int W = 80
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout
);
  localparam int G = num_groups(W);

  logic [G:0] carry;   // carry[k]: real carry into group k
  assign carry[0] = cin;

  for (genvar k = 0; k < G; k++) begin : g_grp
    localparam int LSB = group_lsb(W, k);
    localparam int SZ  = group_size(W, k);
    logic [SZ-1:0] s0;
    logic          c0;

    rca #(.W(SZ)) u_rca (
      .x   (x[LSB +: SZ]),
      .y   (y[LSB +: SZ]),
      .cin (1'b0),
      .s   (s0),
      .cout(c0)
    );

    bec_mux #(.W(SZ)) u_bec (
      .s0  (s0),
      .c0  (c0),
      .sel (carry[k]),
      .s   (s[LSB +: SZ]),
      .cout(carry[k+1])
    );
  end

  assign cout = carry[G];
endmodule
