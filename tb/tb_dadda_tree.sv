// tb_dadda_tree: checks that the two rows left by dadda_tree add up to the
// product a * b. The testbench forms the partial products itself and
// compares row0 + row1 with the product computed by the simulator's own
// multiplication. N = 8 is tested exhaustively (all 65536 operand pairs);
// the default N = 64 with corner and random operands.
module tb_dadda_tree;
  localparam int NS = 8;
  localparam int NL = 64;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  logic [NS-1:0]          as, bs;
  logic [NS-1:0][NS-1:0]  pps;
  logic [2*NS-1:0]        r0s, r1s;
  logic [NL-1:0]          al, bl;
  logic [NL-1:0][NL-1:0]  ppl;
  logic [2*NL-1:0]        r0l, r1l;

  dadda_tree #(.N(NS)) dut_s (.pp(pps), .row0(r0s), .row1(r1s));
  dadda_tree dut_l (.pp(ppl), .row0(r0l), .row1(r1l));

  always_comb for (int i = 0; i < NS; i++) for (int j = 0; j < NS; j++) pps[i][j] = bs[i] & as[j];
  always_comb for (int i = 0; i < NL; i++) for (int j = 0; j < NL; j++) ppl[i][j] = bl[i] & al[j];

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_l();
    logic [2*NL:0] got, exp;
    #1;
    got = {1'b0, r0l} + {1'b0, r1l};
    exp = {1'b0, al} * {1'b0, bl};
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("N=64 a=%h b=%h rows sum %h, product %h", al, bl, got, exp);
    end
  endtask

  initial begin
    for (int ia = 0; ia < 256; ia++) begin
      for (int ib = 0; ib < 256; ib++) begin
        logic [2*NS:0] got, exp;
        as = NS'(ia); bs = NS'(ib);
        #1;
        got = {1'b0, r0s} + {1'b0, r1s};
        exp = (2*NS+1)'(ia * ib);
        checks++;
        if (got !== exp) begin
          failures++;
          if (failures < 10) $display("N=8 a=%0d b=%0d rows sum %0d", ia, ib, got);
        end
      end
      @(posedge clk);
    end
    al = '0; bl = '0; check_l();
    al = '1; bl = '1; check_l();
    al = '1; bl = 64'd1; check_l();
    for (int n = 0; n < 2000; n++) begin
      al = {$urandom, $urandom}; bl = {$urandom, $urandom};
      if (n % 4 == 1) al = '1;
      if (n % 8 == 2) bl = bl >> (n % 64);
      check_l();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
