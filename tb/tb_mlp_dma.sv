// tb_mlp_dma: random write bursts to IOMem, WMem and BMem and read bursts
// from IOMem through the MLP DMA, with a one-cycle-latency memory model on
// its memory port and random valid/ready gaps on both data streams.
// Checks that every written word lands in the named memory at the right
// address (and nowhere else), that reads return the stored words in order,
// and that the command port is ready again after each burst.
module tb_mlp_dma;
  import screc_pkg::*;
  localparam int C = 16, MEMW = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_ready, cmd_write = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  mlp_mem_e cmd_sel = MEM_IO;
  logic [19:0] cmd_addr = 0, cmd_len = 0;
  fp32_t in_data [C], out_data [C];
  logic mem_we, mem_re;
  mlp_mem_e mem_sel;
  logic [19:0] mem_addr;
  fp32_t mem_wdata [C], mem_rdata [C];
  fp32_t m [3][MEMW][C], ref_m [3][MEMW][C];
  int checks = 0, failures = 0;
  mlp_dma dut (.*);

  always @(posedge clk) begin
    if (mem_we) m[int'(mem_sel)][mem_addr % MEMW] <= mem_wdata;
    if (mem_re) mem_rdata <= m[0][mem_addr % MEMW];
  end

  task automatic cmd(input logic wr, input mlp_mem_e sel, input int addr, input int len);
    @(negedge clk);
    cmd_valid = 1; cmd_write = wr; cmd_sel = sel; cmd_addr = 20'(addr); cmd_len = 20'(len);
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  initial begin
    foreach (m[s, a, l]) begin m[s][a][l] = 0; ref_m[s][a][l] = 0; end
    foreach (in_data[l]) in_data[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int a, n;
      mlp_mem_e s;
      a = $urandom_range(MEMW - 64); n = $urandom_range(1, 40);
      if (t % 3 != 2) begin
        s = mlp_mem_e'($urandom_range(2));
        cmd(1, s, a, n);
        for (int w = 0; w < n; w++) begin
          while ($urandom_range(2) == 0) @(negedge clk);
          in_valid = 1;
          foreach (in_data[l]) in_data[l] = $urandom;
          @(posedge clk); while (!in_ready) @(posedge clk);
          for (int l = 0; l < C; l++) ref_m[int'(s)][a + w][l] = (s == MEM_IO || l < 8) ? in_data[l] : 32'd0;
          @(negedge clk);
          in_valid = 0;
        end
      end else begin
        cmd(0, MEM_IO, a, n);
        for (int w = 0; w < n; w++) begin
          out_ready = ($urandom_range(2) != 0);
          @(posedge clk);
          while (!(out_valid && out_ready)) begin
            @(negedge clk); out_ready = ($urandom_range(2) != 0); @(posedge clk);
          end
          for (int l = 0; l < C; l++) begin
            checks++;
            if (out_data[l] !== ref_m[0][a + w][l]) begin
              failures++;
              if (failures < 10) $display("FAIL read word %0d lane %0d", a + w, l);
            end
          end
          @(negedge clk);
          out_ready = 0;
        end
      end
    end
    repeat (3) @(negedge clk);
    // WMem/BMem words keep only lanes 0..7: compare those
    foreach (m[s, a, l]) if (s == 0 || l < 8) begin
      checks++;
      if (m[s][a][l] !== ref_m[s][a][l]) begin
        failures++;
        if (failures < 10) $display("FAIL memory %0d word %0d lane %0d", s, a, l);
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
