// tb_err_unit: checks the error-computation unit. Rows are programmed with random
// transposed weights; S samples are run back to back; each e_l = sat(e_{l+1} x W >>> E_SHIFT)
// is checked one clock after its run, and afterwards every error column read through
// col_sel / e_col is checked against the per-sample results.
module tb_err_unit;
  localparam int N = 8, S = 4, SH = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic prog_row_en = 0, run = 0, e_out_valid;
  logic [$clog2(N)-1:0] prog_row = 0, col_sel = 0;
  logic [$clog2(S)-1:0] run_idx = 0;
  gan_pkg::data_t prog_row_data [N], e_in [N], e_out [N], e_col [S];
  int wt [N][N];
  int expv [S][N];
  int checks = 0, failures = 0;

  err_unit #(.N(N), .S(S), .E_SHIFT(SH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin prog_row_data[i] = 0; e_in[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      prog_row_en = 1; prog_row = r[$clog2(N)-1:0];
      for (int c = 0; c < N; c++) begin
        prog_row_data[c] = 8'($urandom_range(0, 120) - 60);
        wt[r][c] = prog_row_data[c];
      end
    end
    @(negedge clk); prog_row_en = 0;
    for (int s = 0; s < S; s++) begin
      begin
        run = 1; run_idx = s[$clog2(S)-1:0];
        for (int r = 0; r < N; r++) e_in[r] = 8'($urandom_range(0, 200) - 100);
        for (int c = 0; c < N; c++) begin
          automatic int acc = 0;
          for (int r = 0; r < N; r++) acc += int'(e_in[r]) * wt[r][c];
          acc = acc >>> SH;
          expv[s][c] = (acc > 127) ? 127 : (acc < -128) ? -128 : acc;
        end
      end
      @(negedge clk);
      run = 0;
      begin
        automatic bit ok = e_out_valid;
        for (int c = 0; c < N; c++) if (int'(e_out[c]) != expv[s][c]) ok = 0;
        checks++; if (!ok) begin failures++; $display("FAIL sample %0d", s); end
      end
    end
    @(negedge clk);
    for (int c = 0; c < N; c++) begin
      automatic bit ok = 1;
      col_sel = c[$clog2(N)-1:0]; #1;
      for (int s = 0; s < S; s++) if (int'(e_col[s]) != expv[s][c]) ok = 0;
      checks++; if (!ok) begin failures++; $display("FAIL column %0d", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
