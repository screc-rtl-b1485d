// tb_fp32_mul: random and special-value checks of fp32_mul against the
// double-precision reference of tb_fp_pkg.
module tb_fp32_mul;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] x1, input logic [31:0] x2, input logic [31:0] e);
    a = x1; b = x2; #1;
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h * %h = %h, expected %h", x1, x2, y, e);
    end
  endtask

  initial begin
    repeat (20000) begin
      logic [31:0] x1, x2;
      x1 = rand_fp(20, 20); x2 = rand_fp(20, 20);
      check(x1, x2, ref_mul(x1, x2));
    end
    check(32'h3f80_0000, 32'h4000_0000, 32'h4000_0000);   // 1 * 2
    check(32'hc040_0000, 32'h3f00_0000, 32'hbfc0_0000);   // -3 * 0.5
    check(32'h0000_0000, 32'h4000_0000, 32'h0000_0000);   // 0 * 2
    check(32'h7f80_0000, 32'h4000_0000, 32'h7f80_0000);   // inf * 2
    check(32'h7f80_0000, 32'h0000_0000, 32'h7fc0_0000);   // inf * 0
    check(32'h7f00_0000, 32'h7f00_0000, 32'h7f80_0000);   // overflow
    check(32'h0080_0000, 32'h0080_0000, 32'h0000_0000);   // underflow
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
