// tb_fp32_div: random and special-value checks of the sequential fp32_div,
// including its 28-cycle latency from start to done.
module tb_fp32_div;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fp32_div dut (.clk, .rst_n, .start, .a, .b, .busy, .done, .y);

  task automatic run(input logic [31:0] x1, input logic [31:0] x2, input logic [31:0] e, input int lat);
    int n;
    @(negedge clk); a = x1; b = x2; start = 1;
    @(negedge clk); start = 0;
    n = 1;
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("FAIL div %h / %h = %h, expected %h", x1, x2, y, e);
    end
    if (lat > 0) begin
      checks++;
      if (n != lat) begin
        failures++;
        $display("FAIL latency %0d, expected %0d", n, lat);
      end
    end
  endtask

  initial begin
    a = 0; b = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3000) begin
      logic [31:0] x1, x2;
      x1 = rand_fp(20, 20); x2 = rand_fp(20, 20);
      run(x1, x2, ref_div(x1, x2), 28);
    end
    run(32'h4040_0000, 32'h4040_0000, 32'h3f80_0000, 28);   // 3 / 3
    run(32'h3f80_0000, 32'h4040_0000, 32'h3eaa_aaab, 28);   // 1 / 3
    run(32'h40e0_0000, 32'h4000_0000, 32'h4060_0000, 28);   // 7 / 2
    run(32'h4000_0000, 32'h0000_0000, 32'h7f80_0000, 1);    // 2 / 0
    run(32'h0000_0000, 32'h0000_0000, 32'h7fc0_0000, 1);    // 0 / 0
    run(32'h0000_0000, 32'h4000_0000, 32'h0000_0000, 1);    // 0 / 2
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
