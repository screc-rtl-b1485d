// tb_pe: drives one PE with random operand streams and checks the
// accumulated fp32 dot product, the clear, the valid gating and the
// one-cycle operand forwarding.
module tb_pe;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, a_vld = 0, a_vld_out;
  logic [31:0] a_in = 0, b_in = 0, a_out, b_out, acc, ref_acc;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pe dut (.clk, .rst_n, .clr, .a_vld, .a_in, .b_in, .a_vld_out, .a_out, .b_out, .acc);

  task automatic chk(input logic [31:0] got, input logic [31:0] exp_v, input string what);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h expected %h", what, got, exp_v);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (200) begin
      int n;
      n = 1 + $urandom_range(20);
      @(negedge clk); clr = 1; a_vld = 1; a_in = rand_fp(); b_in = rand_fp();
      @(negedge clk); clr = 0;
      chk(acc, 32'd0, "clear");
      ref_acc = 0;
      for (int k = 0; k < n; k++) begin
        logic v;
        v = (k == 0) || ($urandom_range(3) != 0);
        a_vld = v; a_in = rand_fp(); b_in = rand_fp();
        if (v) ref_acc = ref_add(ref_acc, ref_mul(a_in, b_in));
        @(negedge clk);
        chk(a_out, a_in, "a forward");
        chk(b_out, b_in, "b forward");
        chk({31'd0, a_vld_out}, {31'd0, v}, "valid forward");
      end
      a_vld = 0;
      @(negedge clk);
      chk(acc, ref_acc, "dot product");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
