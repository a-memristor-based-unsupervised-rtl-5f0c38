// ifc_neuron: integrate-and-fire output stage of a crossbar, LANES bit lines wide.
//
// An integrate-and-fire circuit integrates the bit-line current and fires once per
// threshold crossing, so its spike count is the bit-line value divided by the threshold,
// and it never fires for a negative current. Here the threshold is 2^SHIFT and the count is
// an arithmetic right shift, saturated to OUT_W bits. With RELU=1 negative sums give zero,
// which is how the forward layers get their ReLU; with RELU=0 the stage is signed, as the
// error-computation units need. Purely combinational. The shift-and-saturate form of the
// spike counter and the SHIFT values are this design's choices.
module ifc_neuron #(
  parameter int LANES = 32,
  parameter int IN_W  = 21,
  parameter int OUT_W = 8,
  parameter int SHIFT = 5,
  parameter bit RELU  = 1'b1
) (
  input  logic signed [IN_W-1:0]  sum_in  [LANES],
  output logic signed [OUT_W-1:0] val_out [LANES]
);
  localparam logic signed [IN_W-1:0] MAXV = IN_W'((64'sd1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [IN_W-1:0] MINV = RELU ? '0 : IN_W'(-(64'sd1 <<< (OUT_W - 1)));

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [IN_W-1:0] q;
      q = sum_in[i] >>> SHIFT;
      if (q > MAXV)      val_out[i] = OUT_W'(MAXV);
      else if (q < MINV) val_out[i] = OUT_W'(MINV);
      else               val_out[i] = OUT_W'(q);
    end
  end
endmodule
