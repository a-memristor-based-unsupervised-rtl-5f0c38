// diff_adder: accumulating adder of the diff block, with the 1/m linear transformation.
//
// 'clr' empties the accumulator; every cycle with add_en adds 'a'. The output is
//   result = sat(acc >>> SHIFT + offset)
// i.e. the mean of the accumulated values when the batch size is m = 2^SHIFT, plus an
// offset. The first adder (Error_G) uses offset 0; the second (Error_D) takes the first
// adder's result as its offset, matching the block diagram where adder 1 feeds adder 2.
// result is combinational from the accumulator. Realising 1/m as a shift (m a power of two)
// is this design's choice.
module diff_adder #(
  parameter int DATA_W = 16,
  parameter int SHIFT  = 6,
  parameter int ACC_W  = DATA_W + SHIFT + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     add_en,
  input  logic signed [DATA_W-1:0] a,
  input  logic signed [DATA_W-1:0] offset,
  output logic signed [DATA_W-1:0] result
);
  logic signed [ACC_W-1:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc <= '0;
    else if (clr)    acc <= '0;
    else if (add_en) acc <= acc + ACC_W'(a);
  end

  always_comb result = DATA_W'(gan_pkg::sat_s(48'(acc >>> SHIFT) + 48'(offset), DATA_W));
endmodule
