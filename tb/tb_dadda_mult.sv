// tb_dadda_mult: end-to-end test of the multiplier at its default size
// (N = 64, no parameter override). A new operand pair is applied before
// every rising edge; the product of the pair captured at edge k must appear
// on p after edge k+1 (one cycle of latency, one product per cycle). The
// expected value is the simulator's own 128-bit multiplication.
// Operands: zero, all ones, one-hot, all-ones times one-hot, and random
// values with random sparsity. The test also counts how often the carry
// from region 1 into region 2 and from region 2 into region 3 of the final
// adder was 1 and 0 (the cases in which the BEC paths are and are not
// selected) and fails if any of the four never happened.
module tb_dadda_mult;
  localparam int N = 64;
  logic           clk = 1'b0;
  logic [N-1:0]   a, b;
  logic [2*N-1:0] p;
  int checks = 0, failures = 0;
  int c1_seen[2], c2_seen[2];
  int cycles = 0;

  dadda_mult dut (.clk(clk), .a(a), .b(b), .p(p));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Carries between the regions, sampled while the captured operands are
  // being multiplied.
  always @(negedge clk) begin
    c1_seen[dut.u_cpa.c_r1]++;
    c2_seen[dut.u_cpa.c_r2]++;
  end

  function automatic logic [N-1:0] rnd();
    logic [N-1:0] v = {$urandom, $urandom};
    case ($urandom % 4)
      0: v = v & {$urandom, $urandom};      // sparse
      1: v = v | {$urandom, $urandom};      // dense
      default: ;
    endcase
    return v;
  endfunction

  localparam int NVEC = 4000;
  logic [N-1:0] va [NVEC];
  logic [N-1:0] vb [NVEC];

  initial begin
    int nv = 0;
    va[nv] = '0; vb[nv] = '0; nv++;
    va[nv] = '1; vb[nv] = '1; nv++;
    va[nv] = '1; vb[nv] = 64'd1; nv++;
    for (int k = 0; k < N; k++) begin
      va[nv] = '1; vb[nv] = 64'd1 << k; nv++;
      va[nv] = 64'd1 << k; vb[nv] = 64'd1 << (N - 1 - k); nv++;
    end
    while (nv < NVEC) begin
      va[nv] = rnd(); vb[nv] = rnd(); nv++;
    end

    // Apply vector i on the falling edge before rising edge i; check the
    // product after rising edge i+1.
    for (int i = 0; i < NVEC + 1; i++) begin
      @(negedge clk);
      if (i < NVEC) begin
        a = va[i]; b = vb[i];
      end
      if (i >= 2) begin
        logic [2*N-1:0] exp;
        exp = {64'd0, va[i-2]} * {64'd0, vb[i-2]};
        checks++;
        if (p !== exp) begin
          failures++;
          if (failures < 10) $display("a=%h b=%h p=%h expected %h", va[i-2], vb[i-2], p, exp);
        end
      end
      cycles++;
    end
    // the product of the last pair is on p one cycle later
    @(negedge clk);
    checks++;
    if (p !== {64'd0, va[NVEC-1]} * {64'd0, vb[NVEC-1]}) failures++;

    for (int c = 0; c < 2; c++) begin
      checks += 2;
      if (c1_seen[c] == 0) begin failures++; $display("region-1 carry never %0d", c); end
      if (c2_seen[c] == 0) begin failures++; $display("region-2 carry never %0d", c); end
    end
    $display("products: %0d in %0d cycles", NVEC, cycles + 1);
    $display("region-1 carry 0/1: %0d/%0d, region-2 carry 0/1: %0d/%0d",
             c1_seen[0], c1_seen[1], c2_seen[0], c2_seen[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
