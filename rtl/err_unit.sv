// err_unit: error-computation unit E_l of the memory-free backward flow.
//
// The crossbar is programmed with the transposed weights of the next layer: row c holds
// kernel c of L_{l+1} (its column c), so driving the word lines with e_{l+1} gives
// e_l = e_{l+1} x w^T_{l+1} on the bit lines. A signed integrate-and-fire stage scales
// the sums by 2^-E_SHIFT and saturates them to 8 bits. Samples are processed one per
// clock; e_out is valid one clock after 'run' and is also latched per sample (run_idx) so
// that the weight-updating unit can read one error column across all S samples (col_sel ->
// e_col, combinational).
//
// Following the paper's figures, E_l holds w^T of layer l+1. The per-sample error latch and
// E_SHIFT are this design's choices: the paper does not say how the errors of all samples
// reach the weight-updating unit.
module err_unit #(
  parameter int N       = 32,
  parameter int S       = 32,
  parameter int E_SHIFT = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    prog_row_en,
  input  logic [$clog2(N)-1:0]    prog_row,
  input  gan_pkg::data_t          prog_row_data [N],
  input  logic                    run,
  input  logic [$clog2(S)-1:0]    run_idx,
  input  gan_pkg::data_t          e_in  [N],
  output gan_pkg::data_t          e_out [N],
  output logic                    e_out_valid,
  input  logic [$clog2(N)-1:0]    col_sel,
  output gan_pkg::data_t          e_col [S]
);
  import gan_pkg::*;
  localparam int SUM_W = 2 * DATA_W + $clog2(N);

  logic signed [SUM_W-1:0] bl [N];
  data_t                   unused_col [N];
  data_t                   unused_rd  [N];
  data_t                   e_lat [S][N];
  logic [$clog2(S)-1:0]    idx_q;

  always_comb for (int i = 0; i < N; i++) unused_col[i] = '0;

  mem_crossbar #(.ROWS(N), .COLS(N), .IN_W(DATA_W), .G_W(DATA_W), .OUT_W(SUM_W)) u_xbar (
    .clk, .rst_n,
    .prog_row_en, .prog_row, .prog_row_data,
    .prog_col_en(1'b0), .prog_col('0), .prog_col_data(unused_col),
    .run, .wl_in(e_in), .bl_out(bl),
    .rd_col('0), .rd_col_data(unused_rd)
  );

  ifc_neuron #(.LANES(N), .IN_W(SUM_W), .OUT_W(DATA_W), .SHIFT(E_SHIFT), .RELU(1'b0)) u_ifc (
    .sum_in(bl), .val_out(e_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_out_valid <= 1'b0;
      idx_q       <= '0;
    end else begin
      e_out_valid <= run;
      if (run) idx_q <= run_idx;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < S; s++)
        for (int i = 0; i < N; i++) e_lat[s][i] <= '0;
    end else if (e_out_valid) begin
      for (int i = 0; i < N; i++) e_lat[idx_q][i] <= e_out[i];
    end
  end

  always_comb
    for (int s = 0; s < S; s++) e_col[s] = e_lat[s][col_sel];
endmodule
