// op_unit: (de)convolution operation unit L_l of the parallel forward flow.
//
// One memristor crossbar holds the layer's weights w_l, one reshaped kernel per bit line
// (column). The previous layer's output o_{l-1} drives the word lines; the bit-line sums go
// through a bank of ReLU integrate-and-fire stages to give o_l, which is both the input of
// the next layer and the value programmed into the weight-updating unit. Updated weights
// w*_l are written back one column per cycle through the programming port; the error unit
// and weight-updating unit read the weights through the column read port.
//
// Timing: out_vec is valid one clock after 'run' and holds until the next run. Each layer is
// a single N x N tile (N inputs, N outputs); tiling large layers over many crossbars is not
// modelled. O_SHIFT (the IFC threshold) is this design's choice.
module op_unit #(
  parameter int N       = 32,
  parameter int O_SHIFT = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    run,
  input  gan_pkg::data_t          in_vec  [N],
  output gan_pkg::data_t          out_vec [N],
  input  logic                    prog_col_en,
  input  logic [$clog2(N)-1:0]    prog_col,
  input  gan_pkg::data_t          prog_col_data [N],
  input  logic [$clog2(N)-1:0]    rd_col,
  output gan_pkg::data_t          rd_col_data [N]
);
  import gan_pkg::*;
  localparam int SUM_W = 2 * DATA_W + $clog2(N);

  logic signed [SUM_W-1:0] bl [N];
  data_t                   unused_row [N];

  always_comb for (int i = 0; i < N; i++) unused_row[i] = '0;

  mem_crossbar #(.ROWS(N), .COLS(N), .IN_W(DATA_W), .G_W(DATA_W), .OUT_W(SUM_W)) u_xbar (
    .clk, .rst_n,
    .prog_row_en(1'b0), .prog_row('0), .prog_row_data(unused_row),
    .prog_col_en, .prog_col, .prog_col_data,
    .run, .wl_in(in_vec), .bl_out(bl),
    .rd_col, .rd_col_data
  );

  ifc_neuron #(.LANES(N), .IN_W(SUM_W), .OUT_W(DATA_W), .SHIFT(O_SHIFT), .RELU(1'b1)) u_ifc (
    .sum_in(bl), .val_out(out_vec)
  );
endmodule
