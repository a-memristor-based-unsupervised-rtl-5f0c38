// tb_diff_lut: checks every entry of LUT1 and LUT2 (one-clock read) against the gradient
// formulas evaluated here in real arithmetic: LUT1 = floor(2^FRAC / D), LUT2 =
// -floor(2^FRAC / (1 - D)), with D = (d + 0.5) / 128 and saturation to 16 bits.
module tb_diff_lut;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [6:0] addr = 0;
  logic signed [15:0] d1, d2;
  int checks = 0, failures = 0;

  diff_lut #(.KIND(1)) u1 (.clk, .addr, .data(d1));
  diff_lut #(.KIND(2)) u2 (.clk, .addr, .data(d2));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < 128; d++) begin
      real dv;
      int e1, e2;
      @(negedge clk); addr = d[6:0];
      dv = (real'(d) + 0.5) / 128.0;
      e1 = int'($floor(16.0 / dv + 1e-9));
      e2 = -int'($floor(16.0 / (1.0 - dv) + 1e-9));
      if (e1 > 32767) e1 = 32767;
      if (e2 < -32767) e2 = -32767;
      @(negedge clk);
      checks += 2;
      if (int'(d1) != e1) begin failures++; $display("FAIL LUT1[%0d] = %0d exp %0d", d, d1, e1); end
      if (int'(d2) != e2) begin failures++; $display("FAIL LUT2[%0d] = %0d exp %0d", d, d2, e2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
