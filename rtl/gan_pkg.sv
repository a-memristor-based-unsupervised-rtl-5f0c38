// gan_pkg: constants and small helpers shared by the memristor GAN accelerator.
//
// All data in the accelerator is 8-bit (the device precision chosen by the design:
// memristors with 8-bit states). Activations, errors and weights are signed 8-bit values;
// forward activations are non-negative after the ReLU stage. Diff-block gradients are
// 16-bit signed fixed point with GRAD_FRAC fractional bits. The default sizes follow the
// design point: 32x32 crossbars, five layers per block, 32 samples in parallel and a batch
// of 64. Scaling shifts (IFC thresholds, learning rate) are this implementation's choices.
package gan_pkg;
  localparam int DATA_W    = 8;    // device / data precision
  localparam int XBAR_N    = 32;   // crossbar word lines and bit lines
  localparam int NUM_LAYER = 5;    // layers per generator / discriminator
  localparam int PAR_S     = 32;   // computing parallelism (samples per pass)
  localparam int BATCH_M   = 64;   // mini-batch size
  localparam int GRAD_W    = 16;   // diff-block gradient width
  localparam int GRAD_FRAC = 4;    // fractional bits of the LUT gradients
  localparam int SCORE_W   = 7;    // discriminator score used as LUT address

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [GRAD_W-1:0] grad_t;

  // Saturate a wide signed value to the signed range of 'bits' bits (bits <= 32).
  function automatic logic signed [31:0] sat_s(input logic signed [47:0] v, input int bits);
    logic signed [47:0] hi, lo;
    hi = (48'sd1 <<< (bits - 1)) - 48'sd1;
    lo = -(48'sd1 <<< (bits - 1));
    if (v > hi) return 32'(hi);
    else if (v < lo) return 32'(lo);
    else return 32'(v);
  endfunction

  // Event counters of the control unit (one training run).
  typedef struct packed {
    logic [31:0] cycles;        // start to done
    logic [31:0] d_busy;        // cycles the discriminator block is busy
    logic [31:0] g_busy;        // cycles the generator block is busy
    logic [31:0] both_busy;     // cycles both blocks are busy at once
    logic [31:0] ab_overlap;    // real-data pass (a) overlapping generation (b)
    logic [31:0] ef_overlap;    // discriminator update (e) overlapping generator update (f)
    logic [31:0] d_wait_g;      // discriminator idle, waiting for artificial samples
    logic [15:0] async_starts;  // next-iteration D forward started while G still updating
    logic [15:0] iters;         // completed iterations
  } stats_t;
endpackage
