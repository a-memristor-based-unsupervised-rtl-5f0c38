// tb_wu_unit: checks the weight-updating unit. o_l of S samples is programmed into the rows;
// for every column c the unit is run with e_l[.][c] and, one clock later, w_new must equal
// sat(w_old + (sum_s e[s][c] * o[s][r]) >>> ALPHA_SHIFT), with w_new_col = c.
module tb_wu_unit;
  localparam int N = 8, S = 4, AS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic prog_row_en = 0, run = 0, w_new_valid;
  logic [$clog2(S)-1:0] prog_row = 0;
  logic [$clog2(N)-1:0] run_col = 0, w_new_col;
  gan_pkg::data_t prog_row_data [N], e_col [S], w_old [N], w_new [N];
  int o [S][N];
  int e [S][N];
  int checks = 0, failures = 0;

  wu_unit #(.N(N), .S(S), .ALPHA_SHIFT(AS)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin prog_row_data[i] = 0; w_old[i] = 0; end
    for (int s = 0; s < S; s++) e_col[s] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < S; s++) begin
      @(negedge clk);
      prog_row_en = 1; prog_row = s[$clog2(S)-1:0];
      for (int r = 0; r < N; r++) begin
        prog_row_data[r] = 8'($urandom_range(0, 60));
        o[s][r] = prog_row_data[r];
        e[s][r] = $urandom_range(0, 40) - 20;
      end
    end
    @(negedge clk); prog_row_en = 0;
    for (int c = 0; c < N; c++) begin
      int expw [N];
      run = 1; run_col = c[$clog2(N)-1:0];
      for (int s = 0; s < S; s++) e_col[s] = 8'(e[s][c]);
      @(negedge clk);
      run = 0;
      for (int r = 0; r < N; r++) begin
        automatic int acc = 0;
        w_old[r] = 8'($urandom_range(0, 255));
        for (int s = 0; s < S; s++) acc += e[s][c] * o[s][r];
        acc = (acc >>> AS) + int'(w_old[r]);
        expw[r] = (acc > 127) ? 127 : (acc < -128) ? -128 : acc;
      end
      #1;
      begin
        automatic bit ok = w_new_valid && (w_new_col == c[$clog2(N)-1:0]);
        for (int r = 0; r < N; r++) if (int'(w_new[r]) != expw[r]) ok = 0;
        checks++; if (!ok) begin failures++; $display("FAIL column %0d", c); end
      end
    end
    @(negedge clk);
    checks++; if (w_new_valid) begin failures++; $display("FAIL valid without run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
