// tb_post_pool: fills the three partial pools with random values (some
// lanes chosen so that the sum is exactly zero, which makes their
// dividers finish early), starts post-pooling in sum and average mode for
// random dimensions, random vector counts (including an empty bag) and
// random output back-pressure, and checks every element against the
// correctly rounded reference ((dram + ssd) + tt, then / count), the
// element index and last flag of every beat, and the done pulse.
module tb_post_pool;
  import tb_fp_pkg::*;
  import screc_pkg::*;
  localparam int L = 16, DIM = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, avg = 0, busy, done, out_valid, out_ready = 0, out_last;
  logic [15:0] dim = 0, cnt_dram = 0, cnt_ssd = 0, cnt_tt = 0, out_idx;
  fp32_t acc_dram [DIM], acc_ssd [DIM], acc_tt [DIM], out_data [L];
  int checks = 0, failures = 0, n_done = 0;
  post_pool dut (.*);

  always @(posedge clk) if (done) n_done++;

  initial begin
    int nb, cnt, d0;
    fp32_t e;
    foreach (acc_dram[i]) begin acc_dram[i] = 0; acc_ssd[i] = 0; acc_tt[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      foreach (acc_dram[i]) begin
        acc_dram[i] = rand_fp(6, 6); acc_ssd[i] = rand_fp(6, 6);
        acc_tt[i] = ($urandom_range(5) == 0) ? {~ref_add(acc_dram[i], acc_ssd[i]) >> 31, ref_add(acc_dram[i], acc_ssd[i]) << 1 >> 1} : rand_fp(6, 6);
      end
      dim = 16'((t % 4 == 0) ? 512 : $urandom_range(1, 512));
      avg = (t % 2 == 1);
      cnt_dram = 16'($urandom_range(5)); cnt_ssd = 16'($urandom_range(5)); cnt_tt = 16'($urandom_range(5));
      if (t == 5) begin cnt_dram = 0; cnt_ssd = 0; cnt_tt = 0; end
      cnt = cnt_dram + cnt_ssd + cnt_tt;
      d0 = n_done;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      nb = 0;
      while (1) begin
        out_ready = ($urandom_range(2) != 0);
        @(posedge clk);
        if (out_valid && out_ready) begin
          checks++;
          if (out_idx != 16'(nb * L)) begin failures++; $display("FAIL beat %0d index %0d", nb, out_idx); end
          for (int l = 0; l < L; l++) if (nb*L + l < dim) begin
            int i;
            i = nb*L + l;
            e = ref_add(ref_add(acc_dram[i], acc_ssd[i]), acc_tt[i]);
            if (avg) e = (cnt == 0) ? 32'd0 : ref_div(e, r2f(real'(cnt)));
            checks++;
            if (out_data[l] !== e) begin
              failures++;
              if (failures < 10) $display("FAIL test %0d elem %0d: %h expected %h", t, i, out_data[l], e);
            end
          end
          checks++;
          if (out_last != ((nb + 1) * L >= dim)) begin failures++; $display("FAIL last flag at beat %0d", nb); end
          nb++;
          if (out_last) break;
        end
        @(negedge clk);
      end
      @(negedge clk); out_ready = 0;
      repeat (2) @(negedge clk);
      checks++;
      if (n_done != d0 + 1 || busy) begin failures++; $display("FAIL done/busy after test %0d", t); end
    end
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
