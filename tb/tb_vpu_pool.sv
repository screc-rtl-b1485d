// tb_vpu_pool: streams random row beats (random base element, lane mask,
// last flag) into one device pool of the vector pooling unit, keeps a
// reference sum per element (same addition order: one add per beat) and
// checks the whole accumulator and the vector count after every bag; the
// clear input must empty both. Beats past DIM must be ignored.
module tb_vpu_pool;
  import tb_fp_pkg::*;
  import screc_pkg::*;
  localparam int W = 16, DIM = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, in_valid = 0, in_last = 0;
  logic [15:0] in_base = 0, count;
  fp32_t in_data [W], acc [DIM], ref_acc [DIM];
  logic in_mask [W];
  int checks = 0, failures = 0, ref_cnt = 0;
  vpu_pool dut (.*);

  task automatic check();
    foreach (acc[e]) begin
      checks++;
      if (acc[e] !== ref_acc[e]) begin
        failures++;
        if (failures < 10) $display("FAIL acc[%0d] %h expected %h", e, acc[e], ref_acc[e]);
      end
    end
    checks++;
    if (count != 16'(ref_cnt)) begin failures++; $display("FAIL count %0d expected %0d", count, ref_cnt); end
  endtask

  initial begin
    foreach (ref_acc[e]) ref_acc[e] = 0;
    foreach (in_data[l]) begin in_data[l] = 0; in_mask[l] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int bag = 0; bag < 20; bag++) begin
      for (int b = 0; b < 40; b++) begin
        in_valid = ($urandom_range(3) != 0);
        in_base = (b % 5 == 4) ? 16'(DIM - 8) : 16'($urandom_range(DIM - 1));
        in_last = ($urandom_range(3) == 0);
        foreach (in_data[l]) begin in_data[l] = rand_fp(4, 4); in_mask[l] = ($urandom_range(4) != 0); end
        if (in_valid) begin
          for (int l = 0; l < W; l++)
            if (in_mask[l] && in_base + l < DIM) ref_acc[in_base + l] = ref_add(ref_acc[in_base + l], in_data[l]);
          if (in_last) ref_cnt++;
        end
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      check();
      if (bag % 4 == 3) begin
        clr = 1; @(negedge clk); clr = 0;
        foreach (ref_acc[e]) ref_acc[e] = 0;
        ref_cnt = 0;
        check();
      end
    end
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
