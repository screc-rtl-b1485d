// tb_mlp_bias_adder: drives random 16-lane fp32 vectors and biases (mixed
// magnitudes, zeros and opposite signs) into the bias adder and compares
// every lane with the correctly rounded reference sum.
module tb_mlp_bias_adder;
  import tb_fp_pkg::*;
  import screc_pkg::*;
  localparam int N = 16;
  fp32_t x [N], y [N], bias;
  int checks = 0, failures = 0;
  mlp_bias_adder dut (.x, .bias, .y);
  initial begin
    for (int t = 0; t < 2000; t++) begin
      bias = ($urandom_range(9) == 0) ? 32'd0 : rand_fp(10, 10);
      foreach (x[l]) x[l] = ($urandom_range(9) == 0) ? {~bias[31], bias[30:0]} : rand_fp(10, 10);
      #1;
      foreach (y[l]) begin
        checks++;
        if (y[l] !== ref_add(x[l], bias)) begin
          failures++;
          if (failures < 10) $display("FAIL %h + %h = %h expected %h", x[l], bias, y[l], ref_add(x[l], bias));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
