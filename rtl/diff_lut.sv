// diff_lut: one memristor look-up table of the diff block (LUT1 or LUT2).
//
// The address is the discriminator score d (ADDR_W bits, read as the probability
// D = (d + 0.5) / 2^ADDR_W). KIND = 1 gives LUT1, the derivative of log D:
//   LUT1[d] = floor(2^(ADDR_W+1+FRAC) / (2d + 1))            ( = 2^FRAC / D )
// KIND = 2 gives LUT2, the derivative of log(1 - D):
//   LUT2[d] = -floor(2^(ADDR_W+1+FRAC) / (2^(ADDR_W+1) - 1 - 2d))   ( = -2^FRAC / (1 - D) )
// Values are signed DATA_W-bit fixed point with FRAC fractional bits, saturated. The table
// is filled from these formulas at elaboration. Read latency is one clock (data registered).
// Which quantity each LUT holds follows the paper; the score encoding and the derivative
// with respect to D are this design's choices.
module diff_lut #(
  parameter int ADDR_W = 7,
  parameter int DATA_W = 16,
  parameter int FRAC   = 4,
  parameter int KIND   = 1
) (
  input  logic                     clk,
  input  logic [ADDR_W-1:0]        addr,
  output logic signed [DATA_W-1:0] data
);
  localparam int DEPTH = 1 << ADDR_W;

  function automatic logic signed [DATA_W-1:0] entry(input int d);
    longint num, den, q, maxv;
    num  = longint'(1) << (ADDR_W + 1 + FRAC);
    maxv = (longint'(1) << (DATA_W - 1)) - 1;
    if (KIND == 1) den = 2 * d + 1;
    else           den = (longint'(1) << (ADDR_W + 1)) - 1 - 2 * d;
    q = num / den;
    if (q > maxv) q = maxv;
    return (KIND == 1) ? DATA_W'(q) : DATA_W'(-q);
  endfunction

  logic signed [DATA_W-1:0] rom [DEPTH];

  for (genvar d = 0; d < DEPTH; d++) begin : g_rom
    assign rom[d] = entry(d);
  end

  always_ff @(posedge clk) data <= rom[addr];
endmodule
