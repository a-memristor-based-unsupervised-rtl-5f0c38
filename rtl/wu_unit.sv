// wu_unit: weight-updating unit W_l of the memory-free backward flow.
//
// During the forward pass the layer output o_l of each of the S samples is programmed into
// one word-line row of the crossbar (rows = samples, columns = neurons r). In the backward
// pass, driving the word lines with column c of the layer error across all samples,
// e_l[s][c], gives on bit line r the sum over samples of e_l[s][c] * o_l[s][r], which is the
// update of weight (r, c). An adder then forms w*_l = alpha * update + w_l, with
// alpha = 2^-ALPHA_SHIFT and saturation to 8 bits, and the new column is handed out for
// programming into the operation units.
//
// Timing: 'run' with run_col = c; one clock later w_new_valid is high, w_new_col = c, and
// w_new is combinational from the registered update and w_old, which the caller must supply
// in that cycle (column c read from the operation unit). The use of o_l (not o_{l-1}) follows
// the paper's update rule literally; ALPHA_SHIFT is this design's choice.
module wu_unit #(
  parameter int N           = 32,
  parameter int S           = 32,
  parameter int ALPHA_SHIFT = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    prog_row_en,
  input  logic [$clog2(S)-1:0]    prog_row,
  input  gan_pkg::data_t          prog_row_data [N],
  input  logic                    run,
  input  logic [$clog2(N)-1:0]    run_col,
  input  gan_pkg::data_t          e_col [S],
  input  gan_pkg::data_t          w_old [N],
  output gan_pkg::data_t          w_new [N],
  output logic                    w_new_valid,
  output logic [$clog2(N)-1:0]    w_new_col
);
  import gan_pkg::*;
  localparam int SUM_W = 2 * DATA_W + $clog2(S);

  logic signed [SUM_W-1:0] delta [N];
  data_t                   unused_col [S];
  data_t                   unused_rd  [S];

  always_comb for (int i = 0; i < S; i++) unused_col[i] = '0;

  mem_crossbar #(.ROWS(S), .COLS(N), .IN_W(DATA_W), .G_W(DATA_W), .OUT_W(SUM_W)) u_xbar (
    .clk, .rst_n,
    .prog_row_en, .prog_row, .prog_row_data,
    .prog_col_en(1'b0), .prog_col('0), .prog_col_data(unused_col),
    .run, .wl_in(e_col), .bl_out(delta),
    .rd_col('0), .rd_col_data(unused_rd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_new_valid <= 1'b0;
      w_new_col   <= '0;
    end else begin
      w_new_valid <= run;
      if (run) w_new_col <= run_col;
    end
  end

  always_comb begin
    for (int r = 0; r < N; r++)
      w_new[r] = DATA_W'(sat_s(48'(delta[r] >>> ALPHA_SHIFT) + 48'(w_old[r]), DATA_W));
  end
endmodule
