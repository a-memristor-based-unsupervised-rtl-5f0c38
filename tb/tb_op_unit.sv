// tb_op_unit: checks the forward operation unit. Random kernels are programmed column by
// column, random non-negative activations are applied, and o_l is compared, one clock after
// 'run', with relu(clamp(sum >>> O_SHIFT)) computed here; the weight read-back port is
// checked too.
module tb_op_unit;
  localparam int N = 32, SH = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic run = 0, prog_col_en = 0;
  logic [$clog2(N)-1:0] prog_col = 0, rd_col = 0;
  gan_pkg::data_t in_vec [N], out_vec [N], prog_col_data [N], rd_col_data [N];
  int w [N][N];
  int checks = 0, failures = 0;

  op_unit #(.N(N), .O_SHIFT(SH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin in_vec[i] = 0; prog_col_data[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < N; c++) begin
      @(negedge clk);
      prog_col_en = 1; prog_col = c[$clog2(N)-1:0];
      for (int r = 0; r < N; r++) begin
        prog_col_data[r] = 8'($urandom_range(0, 40) - 20);
        w[r][c] = prog_col_data[r];
      end
    end
    @(negedge clk); prog_col_en = 0;
    for (int c = 0; c < N; c++) begin
      automatic bit ok = 1;
      rd_col = c[$clog2(N)-1:0]; #1;
      for (int r = 0; r < N; r++) if (rd_col_data[r] != w[r][c]) ok = 0;
      checks++; if (!ok) begin failures++; $display("FAIL read-back %0d", c); end
    end
    for (int t = 0; t < 30; t++) begin
      int e [N];
      automatic int nz = 0;
      @(negedge clk);
      for (int r = 0; r < N; r++) in_vec[r] = 8'($urandom_range(0, 127));
      for (int c = 0; c < N; c++) begin
        automatic int s = 0;
        for (int r = 0; r < N; r++) s += int'(in_vec[r]) * w[r][c];
        s = s >>> SH;
        e[c] = (s < 0) ? 0 : (s > 127) ? 127 : s;
      end
      run = 1;
      @(negedge clk);
      run = 0;
      for (int c = 0; c < N; c++) begin
        checks++;
        if (int'(out_vec[c]) != e[c]) begin
          failures++; $display("FAIL t=%0d c=%0d got %0d exp %0d", t, c, out_vec[c], e[c]);
        end
        if (e[c] != 0) nz++;
      end
      checks++;
      if (nz == 0) begin failures++; $display("FAIL: test vector gives only zeros"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
