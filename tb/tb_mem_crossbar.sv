// tb_mem_crossbar: self-checking test of the crossbar model.
// Programs random conductances by columns and then overwrites some rows, keeps a shadow
// copy, applies random word-line vectors and compares every bit-line sum (one clock after
// 'run') and the column read-back with sums computed from the shadow copy. Also checks that
// bl_out holds when 'run' is low.
module tb_mem_crossbar;
  localparam int R = 32, C = 32, OW = 8 + 8 + $clog2(R);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_row_en = 0, prog_col_en = 0, run = 0;
  logic [$clog2(R)-1:0] prog_row = 0;
  logic [$clog2(C)-1:0] prog_col = 0, rd_col = 0;
  logic signed [7:0] prog_row_data [C], prog_col_data [R], wl_in [R], rd_col_data [R];
  logic signed [OW-1:0] bl_out [C];
  int shadow [R][C];
  int checks = 0, failures = 0;

  mem_crossbar #(.ROWS(R), .COLS(C)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int r = 0; r < R; r++) begin wl_in[r] = 0; prog_col_data[r] = 0; end
    for (int c = 0; c < C; c++) prog_row_data[c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // program every column
    for (int c = 0; c < C; c++) begin
      @(negedge clk);
      prog_col_en = 1; prog_col = c[$clog2(C)-1:0];
      for (int r = 0; r < R; r++) begin
        prog_col_data[r] = 8'($urandom);
        shadow[r][c] = prog_col_data[r];
      end
    end
    @(negedge clk); prog_col_en = 0;
    // overwrite a few rows
    for (int k = 0; k < 5; k++) begin
      int r;
      r = $urandom_range(R - 1);
      prog_row_en = 1; prog_row = r[$clog2(R)-1:0];
      for (int c = 0; c < C; c++) begin
        prog_row_data[c] = 8'($urandom);
        shadow[r][c] = prog_row_data[c];
      end
      @(negedge clk);
    end
    prog_row_en = 0;
    // column read-back
    for (int c = 0; c < C; c++) begin
      bit ok;
      rd_col = c[$clog2(C)-1:0];
      #1; ok = 1;
      for (int r = 0; r < R; r++) if (rd_col_data[r] != shadow[r][c]) ok = 0;
      check(ok, $sformatf("read-back column %0d", c));
    end
    // dot products
    for (int t = 0; t < 20; t++) begin
      int expv [C];
      bit ok;
      @(negedge clk);
      for (int r = 0; r < R; r++) wl_in[r] = 8'($urandom);
      for (int c = 0; c < C; c++) begin
        expv[c] = 0;
        for (int r = 0; r < R; r++) expv[c] += int'(wl_in[r]) * shadow[r][c];
      end
      run = 1;
      @(negedge clk);
      run = 0;
      ok = 1;
      for (int c = 0; c < C; c++) if (int'(bl_out[c]) != expv[c]) ok = 0;
      check(ok, $sformatf("dot product %0d, one cycle after run", t));
      // hold while idle, even when inputs change
      for (int r = 0; r < R; r++) wl_in[r] = 8'($urandom);
      @(negedge clk);
      ok = 1;
      for (int c = 0; c < C; c++) if (int'(bl_out[c]) != expv[c]) ok = 0;
      check(ok, "bl_out holds without run");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
