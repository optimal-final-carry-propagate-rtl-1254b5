// bcla: W-bit variable-block BEC carry look-ahead adder (BCLA), region 3 of
// the hybrid final adder (the top N/4 bits of the product).
//
// Same organisation as bcsla, but each group's carry-in-0 sum comes from a
// carry look-ahead adder (cla) instead of a ripple carry adder. The groups
// follow the square-root sizing of cpa_pkg::group_size; a bec_mux per group
// selects between the group's sum and the sum plus one once the real carry
// in is known. Timing: combinational; cin is the carry out of region 2 and
// cout is the extra (N/4)+1-th output bit of the final adder.
module bcla
  import cpa_pkg::*;
#(
  parameter int W = 16
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

    cla #(.W(SZ)) u_cla (
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
