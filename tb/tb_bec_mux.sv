// tb_bec_mux: checks bec_mux exhaustively at its default width (W = 4) and
// at W = 7. For every group result {c0, s0} and select value the output must
// be {c0, s0} + sel, computed here with the simulator's own addition (the
// increment of the all-ones value wraps to zero within W+1 bits, which the
// carry-select adder never uses but the converter must still produce).
module tb_bec_mux;
  localparam int W  = 4;
  localparam int W2 = 7;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  logic [W-1:0]  s0, s;
  logic          c0, sel, cout;
  logic [W2-1:0] s0b, sb;
  logic          c0b, selb, coutb;

  bec_mux dut (.s0(s0), .c0(c0), .sel(sel), .s(s), .cout(cout));
  bec_mux #(.W(W2)) dut_b (.s0(s0b), .c0(c0b), .sel(selb), .s(sb), .cout(coutb));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < (1 << (W + 2)); i++) begin
      logic [W:0] exp;
      {sel, c0, s0} = (W+2)'(i);
      #1;
      exp = {c0, s0} + (W+1)'(sel);
      checks++;
      if ({cout, s} !== exp) begin
        failures++;
        $display("W=%0d c0=%b s0=%h sel=%b: got %h expected %h", W, c0, s0, sel, {cout, s}, exp);
      end
    end
    for (int i = 0; i < (1 << (W2 + 2)); i++) begin
      logic [W2:0] exp;
      {selb, c0b, s0b} = (W2+2)'(i);
      #1;
      exp = {c0b, s0b} + (W2+1)'(selb);
      checks++;
      if ({coutb, sb} !== exp) begin
        failures++;
        if (failures < 10) $display("W=%0d c0=%b s0=%h sel=%b: got %h expected %h", W2, c0b, s0b, selb, {coutb, sb}, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
