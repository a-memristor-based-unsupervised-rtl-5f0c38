// tb_ifc_neuron: checks the integrate-and-fire output stage in its ReLU and signed forms
// against a reference (arithmetic shift, clamp to [0,127] or [-128,127]) on directed corner
// values and random sums.
module tb_ifc_neuron;
  localparam int L = 8, IW = 21, SH = 5;
  logic signed [IW-1:0] sum_in [L];
  logic signed [7:0] relu_out [L], sgn_out [L];
  int checks = 0, failures = 0;

  ifc_neuron #(.LANES(L), .IN_W(IW), .SHIFT(SH), .RELU(1'b1)) u_relu (.sum_in, .val_out(relu_out));
  ifc_neuron #(.LANES(L), .IN_W(IW), .SHIFT(SH), .RELU(1'b0)) u_sgn  (.sum_in, .val_out(sgn_out));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_q(int v, bit relu);
    int q;
    q = v >>> SH;
    if (q > 127) q = 127;
    if (relu && q < 0) q = 0;
    if (!relu && q < -128) q = -128;
    return q;
  endfunction

  initial begin
    int dir [8] = '{0, 31, 32, -1, -33, 4095, 100000, -100000};
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < L; i++)
        sum_in[i] = (t == 0) ? IW'(dir[i]) : IW'($urandom_range(0, 1 << 18) - (1 << 17));
      #1;
      for (int i = 0; i < L; i++) begin
        checks += 2;
        if (int'(relu_out[i]) != ref_q(int'(sum_in[i]), 1)) begin
          failures++; $display("FAIL relu %0d -> %0d", sum_in[i], relu_out[i]);
        end
        if (int'(sgn_out[i]) != ref_q(int'(sum_in[i]), 0)) begin
          failures++; $display("FAIL signed %0d -> %0d", sum_in[i], sgn_out[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
