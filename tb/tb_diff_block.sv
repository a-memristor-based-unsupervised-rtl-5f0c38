// tb_diff_block: feeds one batch of 64 real scores and then 64 fake scores (one per clock,
// with a gap in the middle) and checks Error_G = mean(LUT2(fake)) and Error_D =
// mean(LUT1(real)) + Error_G, with the LUT values recomputed here from their formulas.
// Checks err_valid comes exactly two clocks after the last fake score, the counters, and
// that a second batch after clr gives its own result.
module tb_diff_block;
  localparam int M = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, in_valid = 0, in_fake = 0, err_valid;
  logic [6:0] in_score = 0;
  logic signed [15:0] err_d, err_g;
  logic [6:0] real_cnt, fake_cnt;
  int checks = 0, failures = 0;

  diff_block #(.M_BATCH(M)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lut1(int d);
    int q = 4096 / (2 * d + 1);
    return q;
  endfunction
  function automatic int lut2(int d);
    return -(4096 / (255 - 2 * d));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++) begin
      automatic longint s1 = 0, s2 = 0;
      automatic int eg, ed, lat;
      clr = 1; @(negedge clk); clr = 0;
      for (int i = 0; i < M; i++) begin
        in_valid = 1; in_fake = 0;
        in_score = (b == 0) ? 7'($urandom_range(64, 127)) : 7'($urandom_range(0, 40));
        s1 += lut1(in_score);
        @(negedge clk);
        if (i == 20) begin in_valid = 0; @(negedge clk); end
      end
      in_valid = 0;
      @(negedge clk);
      check(real_cnt == 7'(M), "real count");
      for (int i = 0; i < M; i++) begin
        in_valid = 1; in_fake = 1;
        in_score = 7'($urandom_range(0, 127));
        s2 += lut2(in_score);
        @(negedge clk);
        check(!err_valid, "no early err_valid");
      end
      in_valid = 0;
      eg = int'(s2 >>> 6);
      ed = int'(s1 >>> 6) + eg;
      lat = 0;
      while (!err_valid && lat < 10) begin @(negedge clk); lat++; end
      check(lat == 1, $sformatf("err_valid latency (%0d extra clocks)", lat));
      check(int'(err_g) == eg, $sformatf("Error_G %0d exp %0d", err_g, eg));
      check(int'(err_d) == ed, $sformatf("Error_D %0d exp %0d", err_d, ed));
      check(fake_cnt == 7'(M), "fake count");
      @(negedge clk);
      check(!err_valid && int'(err_d) == ed, "err_valid pulses once, value holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
