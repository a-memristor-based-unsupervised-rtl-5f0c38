// tb_diff_mem: writes random values to all 64 entries of the memory unit in random order,
// reads them back (one-clock read latency) and compares with a shadow copy; also checks a
// read in the same cycle as a write to the same address returns the old value.
module tb_diff_mem;
  localparam int D = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic signed [15:0] wdata = 0, rdata;
  int shadow [D];
  int checks = 0, failures = 0;

  diff_mem #(.DEPTH(D)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < D; i++) shadow[i] = 0;
    for (int k = 0; k < 3 * D; k++) begin
      @(negedge clk);
      we = 1; waddr = 6'($urandom); wdata = 16'($urandom);
      shadow[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < D; i++) begin
      raddr = i[5:0];
      @(negedge clk);
      checks++;
      if (int'(rdata) != shadow[i]) begin failures++; $display("FAIL M[%0d]", i); end
    end
    // read during write: old value
    we = 1; waddr = 6'd5; raddr = 6'd5; wdata = 16'(shadow[5] + 1);
    @(negedge clk);
    we = 0;
    checks++;
    if (int'(rdata) != shadow[5]) begin failures++; $display("FAIL read-during-write"); end
    @(negedge clk);
    checks++;
    if (int'(rdata) != 16'(shadow[5] + 1) && int'(rdata) != shadow[5] + 1) begin
      failures++; $display("FAIL new value after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
