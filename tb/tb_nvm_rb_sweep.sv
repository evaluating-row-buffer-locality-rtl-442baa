// tb_nvm_rb_sweep: the same row-interleaved sequential stream (512 block
// writes, then 512 block reads, over two banks) run on three chips with
// 8 B, 64 B and 1 KB row buffers, the smallest, the highlighted and the
// DRAM-sized of the evaluated sizes, with PCM timing. Each unit checks its
// data and its ACTIVATE count. Here the row-buffer hit count must follow
// from the geometry (a stream touching each block once in order hits in all
// but the first block of every segment), and the dynamic energy of the
// stream is computed from the per-bit command energies (ACTIVATE 0.3*alpha
// per row-buffer bit, READ 19, WRITE 24.2, write to array 0.3*beta per bit
// written back, pJ; alpha = 2, beta = 100). For the sequential stream every
// sensed byte is used, so the activation energy is the same for all sizes.
// A second, pseudo-random stream of 256 reads has little locality: there
// the activation energy must fall as the row buffer shrinks, which is the
// point of the design. A fourth chip has a 64 B row buffer with STT-RAM
// timing (alpha = gamma = delta = 1, so tRCD = tWR = 8 as in DRAM); it must
// run the same streams with the same counts in fewer cycles than PCM.
module tb_nvm_rb_sweep;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NU = 3;
  localparam int RBS [NU] = '{8, 64, 1024};
  logic done [NU];
  int n_act [NU], n_rd [NU], n_wr [NU], n_hit [NU], n_actr [NU], n_hitr [NU], c [NU], f [NU];
  int checks = 0, failures = 0;
  int cyc [NU];
  logic done_s;
  int s_act, s_rd, s_wr, s_hit, s_actr, s_hitr, s_cyc, s_c, s_f;

  nvm_sweep_unit #(.RB_BYTES(8))    u8    (.clk, .rst_n, .done(done[0]), .n_act(n_act[0]), .n_rd(n_rd[0]),
                                          .n_wr(n_wr[0]), .n_hit(n_hit[0]), .n_act_rand(n_actr[0]), .n_hit_rand(n_hitr[0]), .cycles(cyc[0]), .checks(c[0]), .failures(f[0]));
  nvm_sweep_unit #(.RB_BYTES(64))   u64   (.clk, .rst_n, .done(done[1]), .n_act(n_act[1]), .n_rd(n_rd[1]),
                                          .n_wr(n_wr[1]), .n_hit(n_hit[1]), .n_act_rand(n_actr[1]), .n_hit_rand(n_hitr[1]), .cycles(cyc[1]), .checks(c[1]), .failures(f[1]));
  nvm_sweep_unit #(.RB_BYTES(1024)) u1024 (.clk, .rst_n, .done(done[2]), .n_act(n_act[2]), .n_rd(n_rd[2]),
                                          .n_wr(n_wr[2]), .n_hit(n_hit[2]), .n_act_rand(n_actr[2]), .n_hit_rand(n_hitr[2]), .cycles(cyc[2]), .checks(c[2]), .failures(f[2]));

  nvm_sweep_unit #(.RB_BYTES(64), .ALPHA_X100(100), .GAMMA_X100(100), .DELTA_X100(100)) u_stt
    (.clk, .rst_n, .done(done_s), .n_act(s_act), .n_rd(s_rd), .n_wr(s_wr), .n_hit(s_hit),
     .n_act_rand(s_actr), .n_hit_rand(s_hitr), .cycles(s_cyc), .checks(s_c), .failures(s_f));

  initial begin
    #5ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    real e_act [NU], e_total [NU], e_rand [NU];
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2] && done_s);
    for (int i = 0; i < NU; i++) begin
      int accesses, misses;
      checks += c[i]; failures += f[i];
      accesses = n_rd[i] + n_wr[i];
      misses = 2 * 2 * 2 * (1024 / RBS[i]);
      checks++;
      if (n_hit[i] != accesses - misses || accesses != 1024) begin
        failures++;
        $display("RB %0d B: %0d hits of %0d accesses, expected %0d", RBS[i], n_hit[i], accesses, accesses - misses);
      end
      e_act[i]   = n_act[i] * 0.3 * 2.0 * RBS[i] * 8;
      e_total[i] = e_act[i] + n_rd[i] * 19.0 * 64 + n_wr[i] * (24.2 + 0.3 * 100.0) * 64;
      $display("RB %4d B: ACT %4d READ %4d WRITE %4d hit rate %5.1f%%  activation energy %9.1f nJ  total %9.1f nJ",
               RBS[i], n_act[i], n_rd[i], n_wr[i], 100.0 * n_hit[i] / accesses, e_act[i] / 1000.0, e_total[i] / 1000.0);
      e_rand[i] = n_actr[i] * 0.3 * 2.0 * RBS[i] * 8;
      $display("RB %4d B, random reads: ACT %3d hit rate %5.1f%%  activation energy %9.1f nJ  total %9.1f nJ",
               RBS[i], n_actr[i], 100.0 * n_hitr[i] / 256, e_rand[i] / 1000.0, (e_rand[i] + 256 * 19.0 * 64) / 1000.0);
    end
    // activation energy per byte sensed is the same, so with a stream that
    // uses every byte it sensed the totals match; it is the unused part of a
    // large row buffer that costs energy, which a sequential stream does not
    // have. So check equal activation energy here, and the hit rate ordering.
    checks++;
    if (!(n_hit[0] < n_hit[1] && n_hit[1] < n_hit[2])) begin
      failures++; $display("hit count does not grow with the row buffer");
    end
    checks++;
    if (e_act[0] != e_act[1] || e_act[1] != e_act[2]) begin
      failures++; $display("activation energy differs for a stream that uses every sensed byte");
    end
    checks += s_c; failures += s_f;
    checks++;
    if (s_act != n_act[1] || s_hit != n_hit[1] || s_actr != n_actr[1] || !(s_cyc < cyc[1])) begin
      failures++; $display("STT-RAM chip: counts differ from PCM or not faster");
    end
    $display("64 B row buffer: PCM %0d cycles, STT-RAM %0d cycles for the same streams", cyc[1], s_cyc);
    checks++;
    if (!(e_rand[0] < e_rand[1] && e_rand[1] < e_rand[2])) begin
      failures++; $display("activation energy of the random stream does not fall with the row buffer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
