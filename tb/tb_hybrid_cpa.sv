// tb_hybrid_cpa: checks the three-region final adder at its default size
// (N = 64, a 128-bit adder) and at N = 8, 16 and 32 against the simulator's
// own addition. Besides random operands it drives carry chains that start in
// region 1 and run into regions 2 and 3, so that both inter-region carries
// (c_r1, c_r2) are seen at 0 and at 1; a failure is counted if either value
// never occurred. It also checks the region widths of each instance against
// N/2, N + 2^x and N/4 (4/10/2, 8/20/4, 16/40/8 and 32/80/16 bits).
module tb_hybrid_cpa;
  logic clk = 1'b0;
  int checks = 0, failures = 0;
  int c1_seen[2], c2_seen[2];

  logic [127:0] x64, y64, s64;  logic co64;
  logic [15:0]  x8,  y8,  s8;   logic co8;
  logic [31:0]  x16, y16, s16;  logic co16;
  logic [63:0]  x32, y32, s32;  logic co32;

  hybrid_cpa        dut   (.x(x64), .y(y64), .s(s64), .cout(co64));
  hybrid_cpa #(8)   dut8  (.x(x8),  .y(y8),  .s(s8),  .cout(co8));
  hybrid_cpa #(16)  dut16 (.x(x16), .y(y16), .s(s16), .cout(co16));
  hybrid_cpa #(32)  dut32 (.x(x32), .y(y32), .s(s32), .cout(co32));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [127:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic drive(input logic [127:0] x, input logic [127:0] y);
    logic [128:0] e64;
    logic [16:0]  e8;
    logic [32:0]  e16;
    logic [64:0]  e32;
    x64 = x; y64 = y;
    x8  = x[15:0]; y8  = y[15:0];
    x16 = x[31:0]; y16 = y[31:0];
    x32 = x[63:0]; y32 = y[63:0];
    #1;
    e64 = {1'b0, x64} + {1'b0, y64};
    e8  = {1'b0, x8}  + {1'b0, y8};
    e16 = {1'b0, x16} + {1'b0, y16};
    e32 = {1'b0, x32} + {1'b0, y32};
    checks += 4;
    if ({co64, s64} !== e64) begin failures++; if (failures < 10) $display("N=64 x=%h y=%h got %h", x64, y64, {co64, s64}); end
    if ({co8,  s8}  !== e8)  begin failures++; if (failures < 10) $display("N=8 x=%h y=%h got %h", x8, y8, {co8, s8}); end
    if ({co16, s16} !== e16) begin failures++; if (failures < 10) $display("N=16 x=%h y=%h got %h", x16, y16, {co16, s16}); end
    if ({co32, s32} !== e32) begin failures++; if (failures < 10) $display("N=32 x=%h y=%h got %h", x32, y32, {co32, s32}); end
    c1_seen[dut.c_r1]++;
    c2_seen[dut.c_r2]++;
  endtask

  initial begin
    logic [127:0] v;
    // region widths
    checks++;
    if (dut8.R1 != 4 || dut8.R2 != 10 || dut8.R3 != 2) failures++;
    checks++;
    if (dut16.R1 != 8 || dut16.R2 != 20 || dut16.R3 != 4) failures++;
    checks++;
    if (dut32.R1 != 16 || dut32.R2 != 40 || dut32.R3 != 8) failures++;
    checks++;
    if (dut.R1 != 32 || dut.R2 != 80 || dut.R3 != 16) failures++;

    drive('0, '0);
    drive('1, 128'd1);
    drive('1, '1);
    for (int k = 0; k < 128; k++) begin
      v = rnd();
      drive(v, ~v);                        // all propagate, no carry
      drive(v, ~v + (128'd1 << k));        // carry generated at bit k runs up
      drive(128'd1 << k, 128'd1 << k);     // single generate
    end
    for (int n = 0; n < 5000; n++) begin
      @(posedge clk);
      drive(rnd(), rnd());
    end
    for (int c = 0; c < 2; c++) begin
      checks += 2;
      if (c1_seen[c] == 0) begin failures++; $display("region-1 carry never %0d", c); end
      if (c2_seen[c] == 0) begin failures++; $display("region-2 carry never %0d", c); end
    end
    $display("region-1 carry 0/1: %0d/%0d, region-2 carry 0/1: %0d/%0d",
             c1_seen[0], c1_seen[1], c2_seen[0], c2_seen[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
