// tb_and_array: checks every partial-product bit of and_array (N = 64)
// against b[i] & a[j] for random operands and for all-ones, all-zeros and
// one-hot operands.
module tb_and_array;
  localparam int N = 64;
  logic [N-1:0]        a, b;
  logic [N-1:0][N-1:0] pp;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  and_array #(.N(N)) dut (.a(a), .b(b), .pp(pp));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int bad = 0;
    #1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        if (pp[i][j] !== (b[i] && a[j])) bad++;
    checks++;
    if (bad != 0) begin
      failures++;
      $display("a=%h b=%h: %0d wrong partial products", a, b, bad);
    end
  endtask

  initial begin
    a = '0; b = '0;      check();
    a = '1; b = '1;      check();
    a = '1; b = '0;      check();
    for (int k = 0; k < N; k++) begin
      a = '1; b = '0; b[k] = 1'b1; check();
      a = '0; a[k] = 1'b1; b = '1; check();
    end
    for (int n = 0; n < 500; n++) begin
      a = {$urandom, $urandom}; b = {$urandom, $urandom}; check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
