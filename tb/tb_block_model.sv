// tb_block_model: timing model of a generator / discriminator block for control tests.
// A forward start makes out_valid pulse FWD_LAT clocks later and keeps busy high for
// FWD_BUSY clocks; a backward start keeps busy high for BWD_BUSY clocks and pulses bwd_done
// in the clock after. Starting while busy is counted in 'violations'.
module tb_block_model #(
  parameter int FWD_LAT  = 5,
  parameter int FWD_BUSY = 37,
  parameter int BWD_BUSY = 80
) (
  input  logic clk,
  input  logic rst_n,
  input  logic fwd_start,
  input  logic bwd_start,
  output logic out_valid,
  output logic bwd_done,
  output logic busy,
  output int   violations,
  output int   n_fwd,
  output int   n_bwd
);
  int cnt, lat;
  logic in_bwd;
  assign busy = (cnt > 0);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= 0; lat <= 0; in_bwd <= 0; out_valid <= 0; bwd_done <= 0;
      violations <= 0; n_fwd <= 0; n_bwd <= 0;
    end else begin
      out_valid <= (lat == 1);
      if (lat > 0) lat <= lat - 1;
      bwd_done <= in_bwd && (cnt == 1);
      if (cnt > 0) cnt <= cnt - 1;
      if ((fwd_start || bwd_start) && busy) violations <= violations + 1;
      if (fwd_start) begin cnt <= FWD_BUSY; lat <= FWD_LAT; in_bwd <= 0; n_fwd <= n_fwd + 1; end
      if (bwd_start) begin cnt <= BWD_BUSY; in_bwd <= 1; n_bwd <= n_bwd + 1; end
    end
  end
endmodule
