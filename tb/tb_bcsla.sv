// tb_bcsla: checks bcsla at its default width (W = 80) against the sum x + y + cin
// worked out by the simulator's own addition. Operands: zeros, all ones,
// carry chains that run the full width (x = ~y with cin = 1), single-bit
// carries and random values, each with both carry-in values. A second
// instance at W = 5 is checked exhaustively.
module tb_bcsla;
  localparam int W  = 80;
  localparam int WS = 5;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  logic [W-1:0]  x, y, s;
  logic          cin, cout;
  logic [WS-1:0] xs, ys, ss;
  logic          cins, couts;

  bcsla dut (.x(x), .y(y), .cin(cin), .s(s), .cout(cout));
  bcsla #(.W(WS)) dut_s (.x(xs), .y(ys), .cin(cins), .s(ss), .cout(couts));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v = {v, $urandom};
    return v;
  endfunction

  task automatic check();
    logic [W:0] exp;
    for (int c = 0; c < 2; c++) begin
      cin = c[0];
      #1;
      exp = {1'b0, x} + {1'b0, y} + (W+1)'(cin);
      checks++;
      if ({cout, s} !== exp) begin
        failures++;
        if (failures < 10) $display("x=%h y=%h cin=%b: got %h expected %h", x, y, cin, {cout, s}, exp);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < (1 << (2 * WS + 1)); i++) begin
      logic [2*WS:0] v;
      logic [WS:0]   exp;
      v = (2*WS+1)'(i);
      {cins, xs, ys} = v;
      #1;
      exp = {1'b0, xs} + {1'b0, ys} + (WS+1)'(cins);
      checks++;
      if ({couts, ss} !== exp) begin
        failures++;
        if (failures < 10) $display("W=%0d x=%h y=%h cin=%b: got %h expected %h", WS, xs, ys, cins, {couts, ss}, exp);
      end
    end
    x = '0; y = '0; check();
    x = '1; y = '1; check();
    x = '1; y = '0; check();
    for (int k = 0; k < W; k++) begin
      x = '1; x[k] = 1'b0; y = '0; check();     // carry chain broken at bit k
      x = '0; x[k] = 1'b1; y = x; check();      // one generate at bit k
      x = rnd(); y = ~x; check();               // propagate everywhere
    end
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk);
      x = rnd(); y = rnd(); check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
