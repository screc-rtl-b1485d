// tb_tt_wide_mem: random writes and reads (same-cycle read and write
// included) on the TT core memory at its full default depth, checked
// against a reference copy; read data must appear one cycle after the
// read enable and hold while no read is issued.
module tb_tt_wide_mem;
  import screc_pkg::*;
  localparam int DEPTH = 36864, LANES = 32, AW = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  fp32_t wdata [LANES], rdata [LANES], expv [LANES];
  fp32_t model [int][LANES];
  int checks = 0, failures = 0;
  tt_wide_mem dut (.*);

  initial begin
    int a;
    foreach (wdata[l]) wdata[l] = 0;
    // fill a set of addresses including both ends
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      a = (t == 0) ? 0 : (t == 1) ? DEPTH - 1 : $urandom_range(DEPTH - 1);
      we = 1; waddr = AW'(a);
      foreach (wdata[l]) wdata[l] = $urandom;
      model[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      re = ($urandom_range(3) != 0);
      if (re) begin
        int keys [$];
        foreach (model[k]) keys.push_back(k);
        a = keys[$urandom_range(keys.size() - 1)];
        raddr = AW'(a);
        expv = model[a];
      end
      // concurrent write to another address
      we = ($urandom_range(3) == 0);
      waddr = AW'($urandom_range(DEPTH - 1));
      if (we && int'(waddr) == a) we = 0;
      foreach (wdata[l]) wdata[l] = $urandom;
      if (we) model[int'(waddr)] = wdata;
      @(negedge clk);
      re = 0; we = 0;
      foreach (rdata[l]) begin
        checks++;
        if (rdata[l] !== expv[l]) begin
          failures++;
          if (failures < 10) $display("FAIL addr %0d lane %0d: %h expected %h", a, l, rdata[l], expv[l]);
        end
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
