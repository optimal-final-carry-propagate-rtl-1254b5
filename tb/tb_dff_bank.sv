// tb_dff_bank: checks that dff_bank (W = 64) copies d to q at each rising
// edge and holds q between edges. Random data is driven on the falling edge;
// q is compared just before and just after each rising edge with a model
// register kept by the testbench.
module tb_dff_bank;
  localparam int W = 64;
  logic         clk = 1'b0;
  logic [W-1:0] d, q, model;
  int checks = 0, failures = 0;

  dff_bank #(.W(W)) dut (.clk(clk), .d(d), .q(q));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0;
    @(posedge clk);
    #1 model = d;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      d = {$urandom, $urandom};
      #3;  // d has changed, no edge yet: q must hold
      checks++;
      if (q !== model) begin failures++; $display("hold error at %0d", n); end
      @(posedge clk);
      #1 model = d;
      checks++;
      if (q !== model) begin failures++; $display("capture error at %0d: %h vs %h", n, q, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
