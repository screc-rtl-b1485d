// tb_mlp_relu: random fp32 lanes of both signs (and signed zeros) through
// the activation unit with the function enabled and bypassed; negative
// inputs must give +0 when enabled, everything else passes unchanged.
module tb_mlp_relu;
  import tb_fp_pkg::*;
  import screc_pkg::*;
  localparam int N = 16;
  fp32_t x [N], y [N];
  logic en;
  int checks = 0, failures = 0, n_cut = 0;
  mlp_relu dut (.en, .x, .y);
  initial begin
    for (int t = 0; t < 2000; t++) begin
      en = 1'($urandom);
      foreach (x[l]) x[l] = ($urandom_range(15) == 0) ? {1'($urandom), 31'd0} : rand_fp(20, 20);
      #1;
      foreach (y[l]) begin
        fp32_t e;
        e = (en && f2r(x[l]) <= 0.0) ? 32'd0 : x[l];
        if (en && f2r(x[l]) < 0.0) n_cut++;
        checks++;
        if (y[l] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL en=%0d relu(%h) = %h expected %h", en, x[l], y[l], e);
        end
      end
    end
    checks++;
    if (n_cut == 0) failures++;
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
