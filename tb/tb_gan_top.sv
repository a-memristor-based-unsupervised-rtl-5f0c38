// tb_gan_top: end-to-end training test of the whole accelerator at a reduced size
// (discriminator 3 layers, generator 6 layers, S=4 samples per pass, N=8, batch 8, three
// iterations). Weights are loaded through init_*, real data depends on iteration and pass,
// noise on the pass. A reference model written here replays the training step by step:
// forward passes, LUT gradients, Error_D / Error_G, error chains and weight updates of both
// blocks. Checked: the two gradients of every iteration, every final weight of both blocks,
// the final generated samples, and that each pipeline mechanism happened at least once
// (real pass || generation, discriminator idle waiting for the generator, e || f, the next
// iteration's discriminator pass starting while the generator still updates), plus that the
// cross-parallel run beats the sum of the block busy times.
module tb_gan_top;
  localparam int NLD = 3, NLG = 6, S = 4, N = 8, M = 8, NI = 3;
  localparam int OS = 5, ES = 7, AS = 10, RS = 4;
  localparam int NLM = (NLD > NLG) ? NLD : NLG;
  localparam int P = M / S;
  localparam int PP = (S > N) ? S : N;
  localparam int MS = $clog2(M);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done, init_en = 0, init_sel = 0, dbg_sel = 0, err_valid;
  logic [15:0] n_iter = 16'(NI), iter;
  logic [$clog2(NLM)-1:0] init_layer = 0, dbg_layer = 0;
  logic [$clog2(N)-1:0] init_col = 0, dbg_col = 0;
  logic [$clog2(M/S+1)-1:0] real_pass, noise_pass;
  gan_pkg::data_t init_data [N], dbg_data [N];
  gan_pkg::data_t real_in [S][N], noise_in [S][N], gen_out [S][N];
  gan_pkg::grad_t err_d, err_g;
  gan_pkg::stats_t stats;
  int checks = 0, failures = 0;

  gan_top #(.NL_D(NLD), .NL_G(NLG), .S(S), .N(N), .M_BATCH(M), .O_SHIFT(OS), .E_SHIFT(ES),
            .ALPHA_SHIFT(AS), .ERR_SHIFT(RS)) dut (.*);

  // ---------------- training data ----------------
  function automatic int real_val(int it, int p, int s, int i);
    return ((it * 37 + p * 101 + s * 13 + i * 7 + (s * i) % 5) * 29) % 128;
  endfunction
  function automatic int noise_val(int q, int s, int i);
    return ((q * 53 + s * 17 + i * 11 + 3) * 41) % 128;
  endfunction
  always_comb
    for (int s = 0; s < S; s++)
      for (int i = 0; i < N; i++) begin
        real_in[s][i]  = 8'(real_val(int'(iter), int'(real_pass), s, i));
        noise_in[s][i] = 8'(noise_val(int'(noise_pass), s, i));
      end

  // ---------------- reference model ----------------
  int w  [2][NLM][N][N];     // [block][layer][r][c], block 0 = D, 1 = G
  int o  [2][NLM][S][N];     // outputs of the last pass of each block
  int e  [NLM][S][N];
  int exp_ed [NI], exp_eg [NI];
  int got_ed [NI], got_eg [NI];
  int n_err = 0;

  function automatic int sat8(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction
  function automatic int depth(int b);
    return (b == 0) ? NLD : NLG;
  endfunction

  task automatic m_fwd(int b, int x [S][N], output int y [S][N]);
    for (int l = 0; l < depth(b); l++)
      for (int s = 0; s < S; s++)
        for (int c = 0; c < N; c++) begin
          automatic int acc = 0;
          for (int r = 0; r < N; r++) acc += ((l == 0) ? x[s][r] : o[b][l-1][s][r]) * w[b][l][r][c];
          acc = acc >>> OS;
          o[b][l][s][c] = (acc < 0) ? 0 : sat8(acc);
        end
    for (int s = 0; s < S; s++) for (int c = 0; c < N; c++) y[s][c] = o[b][depth(b)-1][s][c];
  endtask

  task automatic m_bwd(int b, int err);
    automatic int nl = depth(b);
    automatic int e8 = sat8(err >>> RS);
    for (int s = 0; s < S; s++) for (int c = 0; c < N; c++) e[nl-1][s][c] = e8;
    for (int l = nl - 2; l >= 0; l--)
      for (int s = 0; s < S; s++)
        for (int r = 0; r < N; r++) begin
          automatic int acc = 0;
          for (int c = 0; c < N; c++) acc += e[l+1][s][c] * w[b][l+1][r][c];
          e[l][s][r] = sat8(acc >>> ES);
        end
    for (int l = 0; l < nl; l++)
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          automatic int acc = 0;
          for (int s = 0; s < S; s++) acc += e[l][s][c] * o[b][l][s][r];
          w[b][l][r][c] = sat8(w[b][l][r][c] + (acc >>> AS));
        end
  endtask

  function automatic int lut1(int d); return 4096 / (2 * d + 1); endfunction
  function automatic int lut2(int d); return -(4096 / (255 - 2 * d)); endfunction

  int last_gen [S][N];
  task automatic model_run();
    int x [S][N];
    int y [S][N];
    for (int t = 0; t < NI; t++) begin
      longint s1, s2;
      s1 = 0; s2 = 0;
      for (int p = 0; p < P; p++) begin
        for (int s = 0; s < S; s++) for (int i = 0; i < N; i++) x[s][i] = real_val(t, p, s, i);
        m_fwd(0, x, y);
        for (int s = 0; s < S; s++) s1 += lut1(y[s][0] % 128);
      end
      for (int q = 0; q < P; q++) begin
        for (int s = 0; s < S; s++) for (int i = 0; i < N; i++) x[s][i] = noise_val(q, s, i);
        m_fwd(1, x, last_gen);
        m_fwd(0, last_gen, y);
        for (int s = 0; s < S; s++) s2 += lut2(y[s][0] % 128);
      end
      exp_eg[t] = int'(s2 >>> MS);
      exp_ed[t] = int'(s1 >>> MS) + exp_eg[t];
      m_bwd(0, exp_ed[t]);
      m_bwd(1, exp_eg[t]);
    end
  endtask

  always @(posedge clk)
    if (err_valid && n_err < NI) begin
      got_ed[n_err] = int'(err_d); got_eg[n_err] = int'(err_g); n_err++;
    end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, changed;
    int w0 [2][NLM][N][N];
    for (int i = 0; i < N; i++) init_data[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++)
      for (int l = 0; l < depth(b); l++)
        for (int c = 0; c < N; c++) begin
          init_en = 1; init_sel = b[0]; init_layer = l[$clog2(NLM)-1:0]; init_col = c[$clog2(N)-1:0];
          for (int r = 0; r < N; r++) begin
            init_data[r] = 8'($urandom_range(0, 24) - 8);
            w[b][l][r][c] = init_data[r];
          end
          @(negedge clk);
        end
    init_en = 0;
    w0 = w;
    model_run();
    start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    check(n_err == NI, $sformatf("%0d gradient pairs produced", n_err));
    for (int t = 0; t < NI; t++) begin
      check(got_ed[t] == exp_ed[t], $sformatf("iteration %0d Error_D %0d exp %0d", t, got_ed[t], exp_ed[t]));
      check(got_eg[t] == exp_eg[t], $sformatf("iteration %0d Error_G %0d exp %0d", t, got_eg[t], exp_eg[t]));
    end
    changed = 0;
    for (int b = 0; b < 2; b++)
      for (int l = 0; l < depth(b); l++)
        for (int c = 0; c < N; c++) begin
          automatic bit ok = 1;
          dbg_sel = b[0]; dbg_layer = l[$clog2(NLM)-1:0]; dbg_col = c[$clog2(N)-1:0]; #1;
          for (int r = 0; r < N; r++) begin
            if (int'(dbg_data[r]) != w[b][l][r][c]) ok = 0;
            if (w[b][l][r][c] != w0[b][l][r][c]) changed++;
          end
          check(ok, $sformatf("final weights block %0d layer %0d column %0d", b, l, c));
        end
    check(changed > 0, $sformatf("training changed %0d weights", changed));
    begin
      automatic bit ok = 1;
      for (int s = 0; s < S; s++) for (int i = 0; i < N; i++)
        if (int'(gen_out[s][i]) != last_gen[s][i]) ok = 0;
      check(ok, "generated samples of the last pass");
    end
    check(stats.iters == 16'(NI), "iterations counted");
    check(stats.ab_overlap > 0, $sformatf("a || b: %0d cycles", stats.ab_overlap));
    check(stats.ef_overlap > 0, $sformatf("e || f: %0d cycles", stats.ef_overlap));
    check(stats.d_wait_g > 0, $sformatf("D idle waiting for G: %0d cycles", stats.d_wait_g));
    check(stats.async_starts > 0, $sformatf("asynchronous D starts: %0d", stats.async_starts));
    check(stats.cycles < stats.d_busy + stats.g_busy,
          $sformatf("overlap: %0d cycles < %0d + %0d busy", stats.cycles, stats.d_busy, stats.g_busy));
    $display("run: %0d cycles, D busy %0d, G busy %0d, both %0d, a||b %0d, e||f %0d, D wait %0d, async %0d",
             stats.cycles, stats.d_busy, stats.g_busy, stats.both_busy, stats.ab_overlap,
             stats.ef_overlap, stats.d_wait_g, stats.async_starts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
