// tb_gan_block: end-to-end test of the parallel memory-free structure at a reduced size
// (NL=3 layers, S=4 samples, N=8). A reference model written here computes the forward
// pass, the error chain through the transposed weights of the next layer, and the weight
// update w* = w + (sum_s e_l[s][c] * o_l[s][r]) >>> ALPHA_SHIFT with the paper's rule (o_l,
// not o_{l-1}). Checked: out_vec of every sample, out_valid exactly NL clocks after
// fwd_start, busy length NL + max(S,N), bwd_done exactly S+N+NL+1 clocks after bwd_start,
// every updated weight (read back through dbg_*), and a second forward pass with the new
// weights, which shows that all S copies of each layer were reprogrammed.
module tb_gan_block;
  localparam int NL = 3, S = 4, N = 8, OS = 5, ES = 7, AS = 10, RS = 4;
  localparam int P = (S > N) ? S : N;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init_en = 0, fwd_start = 0, bwd_start = 0, out_valid, bwd_done, busy;
  logic [$clog2(NL)-1:0] init_layer = 0, dbg_layer = 0;
  logic [$clog2(N)-1:0]  init_col = 0, dbg_col = 0;
  gan_pkg::data_t init_data [N], dbg_data [N];
  gan_pkg::data_t fwd_in [S][N], out_vec [S][N];
  gan_pkg::grad_t bwd_err = 0;
  int checks = 0, failures = 0;

  gan_block #(.NL(NL), .S(S), .N(N), .O_SHIFT(OS), .E_SHIFT(ES), .ALPHA_SHIFT(AS),
              .ERR_SHIFT(RS)) dut (.*);

  int w [NL][N][N];     // w[l][r][c]
  int o [NL][S][N];
  int e [NL][S][N];

  function automatic int sat8(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  task automatic model_fwd();
    for (int l = 0; l < NL; l++)
      for (int s = 0; s < S; s++)
        for (int c = 0; c < N; c++) begin
          automatic int acc = 0;
          for (int r = 0; r < N; r++)
            acc += ((l == 0) ? int'(fwd_in[s][r]) : o[l-1][s][r]) * w[l][r][c];
          acc = acc >>> OS;
          o[l][s][c] = (acc < 0) ? 0 : sat8(acc);
        end
  endtask

  task automatic model_bwd(int err);
    automatic int e8 = sat8(err >>> RS);
    for (int s = 0; s < S; s++) for (int c = 0; c < N; c++) e[NL-1][s][c] = e8;
    for (int l = NL - 2; l >= 0; l--)
      for (int s = 0; s < S; s++)
        for (int r = 0; r < N; r++) begin
          automatic int acc = 0;
          for (int c = 0; c < N; c++) acc += e[l+1][s][c] * w[l+1][r][c];
          e[l][s][r] = sat8(acc >>> ES);
        end
    for (int l = 0; l < NL; l++)
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          automatic int acc = 0;
          for (int s = 0; s < S; s++) acc += e[l][s][c] * o[l][s][r];
          w[l][r][c] = sat8(w[l][r][c] + (acc >>> AS));
        end
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run_fwd(string tag);
    int lat, bl;
    for (int s = 0; s < S; s++) for (int i = 0; i < N; i++) fwd_in[s][i] = 8'($urandom_range(0, 127));
    model_fwd();
    fwd_start = 1; @(negedge clk); fwd_start = 0;
    for (int s = 0; s < S; s++) for (int i = 0; i < N; i++) fwd_in[s][i] = 8'($urandom);
    lat = 1; bl = 1;
    while (!out_valid && lat < 100) begin @(negedge clk); lat++; bl++; end
    check(lat == NL, $sformatf("%s: out_valid %0d clocks after start", tag, lat));
    for (int s = 0; s < S; s++) begin
      automatic bit ok = 1;
      for (int c = 0; c < N; c++) if (int'(out_vec[s][c]) != o[NL-1][s][c]) ok = 0;
      check(ok, $sformatf("%s: output of sample %0d", tag, s));
    end
    while (busy && bl < 200) begin @(negedge clk); bl++; end
    check(bl == NL + P + 1, $sformatf("%s: busy for %0d clocks", tag, bl - 1));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int nz = 0;
    for (int i = 0; i < N; i++) init_data[i] = 0;
    for (int s = 0; s < S; s++) for (int i = 0; i < N; i++) fwd_in[s][i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++)
      for (int c = 0; c < N; c++) begin
        init_en = 1; init_layer = l[$clog2(NL)-1:0]; init_col = c[$clog2(N)-1:0];
        for (int r = 0; r < N; r++) begin
          init_data[r] = 8'($urandom_range(0, 24) - 10);
          w[l][r][c] = init_data[r];
        end
        @(negedge clk);
      end
    init_en = 0;
    run_fwd("first pass");
    // backward
    bwd_err = 16'sd1000;
    model_bwd(1000);
    bwd_start = 1; @(negedge clk); bwd_start = 0;
    begin
      automatic int lat = 1;
      while (!bwd_done && lat < 500) begin @(negedge clk); lat++; end
      check(lat == S + N + NL + 1, $sformatf("bwd_done %0d clocks after start", lat));
    end
    @(negedge clk);
    for (int l = 0; l < NL; l++)
      for (int c = 0; c < N; c++) begin
        automatic bit ok = 1;
        dbg_layer = l[$clog2(NL)-1:0]; dbg_col = c[$clog2(N)-1:0]; #1;
        for (int r = 0; r < N; r++) begin
          if (int'(dbg_data[r]) != w[l][r][c]) ok = 0;
        end
        check(ok, $sformatf("updated weights layer %0d column %0d", l, c));
      end
    // the update must have changed something
    for (int l = 0; l < NL; l++) for (int s = 0; s < S; s++) for (int c = 0; c < N; c++)
      if (e[l][s][c] != 0) nz++;
    check(nz > 0, "non-zero errors in the test");
    run_fwd("second pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
