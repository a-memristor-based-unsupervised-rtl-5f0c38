// tb_diff_adder: accumulates 64 random signed values and checks result = mean (arithmetic
// shift by 6) + offset, saturated to 16 bits; also checks clr and hold without add_en.
module tb_diff_adder;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, add_en = 0;
  logic signed [15:0] a = 0, offset = 0, result;
  int checks = 0, failures = 0;

  diff_adder #(.SHIFT(6)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_result(int e, string what);
    if (e > 32767) e = 32767;
    if (e < -32768) e = -32768;
    checks++;
    if (int'(result) != e) begin failures++; $display("FAIL %s: %0d exp %0d", what, result, e); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      longint sum = 0;
      sum = 0;
      clr = 1; @(negedge clk); clr = 0;
      expect_result(int'(offset), "after clr");
      for (int i = 0; i < 64; i++) begin
        add_en = 1;
        a = (round == 3) ? 16'sd30000 : 16'($urandom_range(0, 40000) - 20000);
        sum += a;
        @(negedge clk);
      end
      add_en = 0;
      offset = (round == 3) ? 16'sd10000 : 16'($urandom_range(0, 2000) - 1000);
      #1;
      expect_result(int'(sum >>> 6) + int'(offset), "mean + offset");
      a = 16'sd1234;
      @(negedge clk);
      expect_result(int'(sum >>> 6) + int'(offset), "hold without add_en");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
