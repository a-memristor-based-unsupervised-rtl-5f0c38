// mem_crossbar: behavioural model of one memristor crossbar (not synthesizable as a real part;
// it is a digital stand-in for an analog array and its periphery).
//
// The array has ROWS word lines and COLS bit lines. Each cross point holds a conductance
// level, modelled as a signed G_W-bit integer (a differential cell pair is assumed so that
// negative weights exist). Applying an input vector to the word lines gives, on every bit
// line, the sum over rows of input x conductance: the analog dot product, here computed
// exactly. A column (bit line) can be programmed at once, which is how a reshaped kernel is
// written; a row can be programmed at once, which is how a per-sample vector is written into
// the weight-updating and error-computation units. A column can be read back.
//
// Timing (this model's choice): a run registers bl_out one clock after 'run'; bl_out holds
// until the next run. Programming takes effect at the clock edge. If a row and a column
// write hit the same cell in one cycle the column write wins. rd_col_data is combinational.
// Reset clears every cell and bl_out to zero.
module mem_crossbar #(
  parameter int ROWS  = 32,
  parameter int COLS  = 32,
  parameter int IN_W  = 8,
  parameter int G_W   = 8,
  parameter int OUT_W = IN_W + G_W + $clog2(ROWS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // row programming
  input  logic                          prog_row_en,
  input  logic [$clog2(ROWS)-1:0]       prog_row,
  input  logic signed [G_W-1:0]         prog_row_data [COLS],
  // column programming
  input  logic                          prog_col_en,
  input  logic [$clog2(COLS)-1:0]       prog_col,
  input  logic signed [G_W-1:0]         prog_col_data [ROWS],
  // compute
  input  logic                          run,
  input  logic signed [IN_W-1:0]        wl_in [ROWS],
  output logic signed [OUT_W-1:0]       bl_out [COLS],
  // read back one column
  input  logic [$clog2(COLS)-1:0]       rd_col,
  output logic signed [G_W-1:0]         rd_col_data [ROWS]
);
  logic signed [G_W-1:0] gcell [ROWS][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          gcell[r][c] <= '0;
    end else begin
      if (prog_row_en)
        for (int c = 0; c < COLS; c++)
          gcell[prog_row][c] <= prog_row_data[c];
      if (prog_col_en)
        for (int r = 0; r < ROWS; r++)
          gcell[r][prog_col] <= prog_col_data[r];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) bl_out[c] <= '0;
    end else if (run) begin
      for (int c = 0; c < COLS; c++) begin
        logic signed [OUT_W-1:0] acc;
        acc = '0;
        for (int r = 0; r < ROWS; r++)
          acc = acc + OUT_W'(wl_in[r] * gcell[r][c]);
        bl_out[c] <= acc;
      end
    end
  end

  always_comb
    for (int r = 0; r < ROWS; r++)
      rd_col_data[r] = gcell[r][rd_col];
endmodule
