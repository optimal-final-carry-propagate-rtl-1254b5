// dadda_mult: N x N unsigned Dadda parallel multiplier with the optimal
// hybrid final carry propagate adder.
//
// Datapath, between two ranks of D flip-flops on one clock:
//   A, B -> dff_bank -> and_array (N^2 partial products)
//        -> dadda_tree (reduction to two rows)
//        -> hybrid_cpa (RCA | BCSLA | BCLA, N/2 | 5N/4 | N/4 bits)
//        -> dff_bank -> P
// The operands present at rising edge k are captured then, multiplied in the
// following clock period, and the 2N-bit product appears on p right after
// rising edge k+1: one cycle from capture to product, a new product every
// cycle. No reset or valid signals, as in the measurement set-up the
// registers come from. The carry out of the final adder can never be 1 for a
// product; an assertion checks that.
module dadda_mult #(
  parameter int N = 64
) (
  input  logic           clk,
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);
  logic [N-1:0]         a_q, b_q;
  logic [N-1:0][N-1:0]  pp;
  logic [2*N-1:0]       row0, row1, sum;
  logic                 cpa_cout;

  dff_bank #(.W(N)) u_in_a (.clk(clk), .d(a), .q(a_q));
  dff_bank #(.W(N)) u_in_b (.clk(clk), .d(b), .q(b_q));

  and_array #(.N(N)) u_and (.a(a_q), .b(b_q), .pp(pp));

  dadda_tree #(.N(N)) u_ppst (.pp(pp), .row0(row0), .row1(row1));

  hybrid_cpa #(.N(N)) u_cpa (.x(row0), .y(row1), .s(sum), .cout(cpa_cout));

  dff_bank #(.W(2*N)) u_out (.clk(clk), .d(sum), .q(p));

  always_ff @(posedge clk) begin
    assert (cpa_cout == 1'b0)
      else $error("dadda_mult: final adder carry out set, product overflowed 2N bits");
  end
endmodule
