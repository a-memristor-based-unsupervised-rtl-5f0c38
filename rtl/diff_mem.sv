// diff_mem: the diff block's memristor memory unit M.
//
// Holds DEPTH signed values (the LUT1 gradients of the real samples of one batch; DEPTH is
// the batch size m = 64). One write port and one read port; the read is registered, so
// rdata is valid one clock after raddr. Written as a register array: the memristor cells and
// their periphery are not modelled. Reset clears the contents.
module diff_mem #(
  parameter int DEPTH  = 64,
  parameter int DATA_W = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  logic signed [DATA_W-1:0]  wdata,
  input  logic [$clog2(DEPTH)-1:0]  raddr,
  output logic signed [DATA_W-1:0]  rdata
);
  logic signed [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
      rdata <= '0;
    end else begin
      if (we) mem[waddr] <= wdata;
      rdata <= mem[raddr];
    end
  end
endmodule
