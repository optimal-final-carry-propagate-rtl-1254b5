// tb_mult_sizes: runs the four multiplier sizes the design was sized for,
// 8 x 8, 16 x 16, 32 x 32 and 64 x 64, side by side. The 8 x 8 multiplier
// sees all 65536 operand pairs; the others see the same number of pairs,
// random, with the low 8 bits of each operand taken from the exhaustive
// sweep. One pair enters every multiplier per clock and each product is
// checked one cycle after its operands were captured.
module tb_mult_sizes;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  logic [7:0]  a8,  b8;   logic [15:0]  p8;
  logic [15:0] a16, b16;  logic [31:0]  p16;
  logic [31:0] a32, b32;  logic [63:0]  p32;
  logic [63:0] a64, b64;  logic [127:0] p64;

  dadda_mult #(.N(8))  m8  (.clk(clk), .a(a8),  .b(b8),  .p(p8));
  dadda_mult #(.N(16)) m16 (.clk(clk), .a(a16), .b(b16), .p(p16));
  dadda_mult #(.N(32)) m32 (.clk(clk), .a(a32), .b(b32), .p(p32));
  dadda_mult #(.N(64)) m64 (.clk(clk), .a(a64), .b(b64), .p(p64));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (70000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // operands applied two falling edges ago, whose products are now on p
  logic [63:0] ha [2];
  logic [63:0] hb [2];

  task automatic compare();
    logic [127:0] ea, eb;
    ea = ha[1]; eb = hb[1];
    checks += 4;
    if (p8  !== 16'(ea[7:0] * eb[7:0]))                    begin failures++; if (failures < 10) $display("8x8 %h*%h=%h", ea[7:0], eb[7:0], p8); end
    if (p16 !== 32'({16'd0, ea[15:0]} * {16'd0, eb[15:0]})) begin failures++; if (failures < 10) $display("16x16 error"); end
    if (p32 !== 64'({32'd0, ea[31:0]} * {32'd0, eb[31:0]})) begin failures++; if (failures < 10) $display("32x32 error"); end
    if (p64 !== 128'(ea * eb))                             begin failures++; if (failures < 10) $display("64x64 error"); end
  endtask

  initial begin
    for (int i = 0; i < 65536 + 2; i++) begin
      logic [63:0] ra, rb;
      @(negedge clk);
      if (i >= 2) compare();
      ra = {$urandom, $urandom}; rb = {$urandom, $urandom};
      ra[7:0] = 8'(i >> 8); rb[7:0] = 8'(i);
      if (i % 97 == 0) begin ra = '1; rb = '1; end
      {a8, b8}   = {ra[7:0], rb[7:0]};
      {a16, b16} = {ra[15:0], rb[15:0]};
      {a32, b32} = {ra[31:0], rb[31:0]};
      {a64, b64} = {ra, rb};
      ha[1] = ha[0]; hb[1] = hb[0];
      ha[0] = ra;    hb[0] = rb;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
