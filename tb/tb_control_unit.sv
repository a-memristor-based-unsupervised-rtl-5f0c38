// tb_control_unit: runs the cross-parallel sequencer for three iterations against timing
// models of the two blocks and of the diff block. Checks: no block is started while busy;
// per iteration P real and P fake discriminator passes, P generator passes and one backward
// pass each; every fake pass of the discriminator takes a completed generator pass; each
// score stream is S long with the right real/fake flag, and all real scores of a batch come
// before the fake ones; the gradients reach the right block. It also checks that each
// pipeline mechanism happens (a || b, e || f, discriminator waiting for the generator, the
// next iteration starting before the generator's update ends) and that the run is shorter
// than the same steps run one after another.
module tb_control_unit;
  localparam int M = 64, S = 32, P = M / S, NI = 3;
  localparam int DFL = 5, DFB = 37, DBB = 120, GFL = 90, GFB = 100, GBB = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done;
  logic d_busy, d_out_valid, d_bwd_done, d_fwd_start, d_src_fake, d_bwd_start;
  logic g_busy, g_out_valid, g_bwd_done, g_fwd_start, g_bwd_start;
  logic signed [15:0] d_err, g_err, diff_err_d, diff_err_g;
  logic diff_clr, diff_valid, diff_fake, diff_err_valid;
  logic [$clog2(S)-1:0] diff_idx;
  logic [$clog2(M/S+1)-1:0] real_pass, noise_pass;
  logic [15:0] iter;
  logic [15:0] n_iter = 16'(NI);
  gan_pkg::stats_t stats;
  int dv, gv, dnf, dnb, gnf, gnb;
  int checks = 0, failures = 0;

  control_unit #(.M_BATCH(M), .S(S)) dut (.*);

  tb_block_model #(.FWD_LAT(DFL), .FWD_BUSY(DFB), .BWD_BUSY(DBB)) u_d (
    .clk, .rst_n, .fwd_start(d_fwd_start), .bwd_start(d_bwd_start), .out_valid(d_out_valid),
    .bwd_done(d_bwd_done), .busy(d_busy), .violations(dv), .n_fwd(dnf), .n_bwd(dnb));
  tb_block_model #(.FWD_LAT(GFL), .FWD_BUSY(GFB), .BWD_BUSY(GBB)) u_g (
    .clk, .rst_n, .fwd_start(g_fwd_start), .bwd_start(g_bwd_start), .out_valid(g_out_valid),
    .bwd_done(g_bwd_done), .busy(g_busy), .violations(gv), .n_fwd(gnf), .n_bwd(gnb));

  // diff-block model: counts the streamed scores, answers with a batch-tagged gradient
  int n_real, n_fake, stream_len, streams, bad_stream, g_done_passes, d_fake_taken;
  int bad_order, bad_take, bad_err;
  logic [2:0] ev_pipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_real <= 0; n_fake <= 0; ev_pipe <= 0; stream_len <= 0; streams <= 0; bad_stream <= 0;
      g_done_passes <= 0; d_fake_taken <= 0; bad_order <= 0; bad_take <= 0; bad_err <= 0;
    end else begin
      ev_pipe <= {ev_pipe[1:0], 1'b0};
      if (diff_clr) begin n_real <= 0; n_fake <= 0; end
      else if (diff_valid) begin
        if (diff_fake) begin
          n_fake <= n_fake + 1;
          if (n_real != M) bad_order <= bad_order + 1;
          if (n_fake == M - 1) ev_pipe <= {ev_pipe[1:0], 1'b1};
        end else n_real <= n_real + 1;
        if (diff_idx != ($clog2(S))'(stream_len % S)) bad_stream <= bad_stream + 1;
        stream_len <= stream_len + 1;
      end
      if (!diff_valid && stream_len != 0) begin
        streams <= streams + 1;
        if (stream_len != S) bad_stream <= bad_stream + 1;
        stream_len <= 0;
      end
      if (g_out_valid) g_done_passes <= g_done_passes + 1;
      if (d_fwd_start && d_src_fake) begin
        d_fake_taken <= d_fake_taken + 1;
        if (d_fake_taken >= g_done_passes) bad_take <= bad_take + 1;
      end
      if (d_bwd_start && d_err != 16'sd1000 + 16'(iter)) bad_err <= bad_err + 1;
      if (g_bwd_start && g_err != -16'sd500) bad_err <= bad_err + 1;
    end
  end
  assign diff_err_valid = ev_pipe[2];
  assign diff_err_d = 16'sd1000 + 16'(iter);
  assign diff_err_g = -16'sd500;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int cyc, serial;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    check(dv == 0 && gv == 0, "no start while busy");
    check(dnf == 2 * P * NI && gnf == P * NI, $sformatf("forward passes D=%0d G=%0d", dnf, gnf));
    check(dnb == NI && gnb == NI, "one backward pass per block per iteration");
    check(streams == 2 * P * NI && bad_stream == 0, $sformatf("score streams %0d bad %0d", streams, bad_stream));
    check(bad_order == 0, "real scores before fake scores");
    check(bad_take == 0 && d_fake_taken == P * NI, "fake passes take finished generator passes");
    check(bad_err == 0, "gradients routed to the right block");
    check(int'(stats.iters) == NI, "iteration counter");
    check(stats.ab_overlap > 0, $sformatf("a || b happened (%0d cycles)", stats.ab_overlap));
    check(stats.ef_overlap > 0, $sformatf("e || f happened (%0d cycles)", stats.ef_overlap));
    check(stats.d_wait_g > 0, $sformatf("D waited for G (%0d cycles)", stats.d_wait_g));
    check(stats.async_starts == 16'(NI - 1), $sformatf("asynchronous starts %0d", stats.async_starts));
    // basic pipeline: every step after the other
    serial = NI * (2 * P * DFB + P * GFB + DBB + GBB);
    check(cyc < serial, $sformatf("cross-parallel %0d cycles < serial %0d", cyc, serial));
    check(int'(stats.cycles) <= cyc + 2 && int'(stats.cycles) >= cyc - 2, "cycle counter");
    $display("run: %0d cycles (serial %0d), D busy %0d, G busy %0d, both %0d", cyc, serial,
             stats.d_busy, stats.g_busy, stats.both_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
