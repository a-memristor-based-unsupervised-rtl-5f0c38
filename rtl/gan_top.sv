// gan_top: memristor-based GAN training accelerator.
//
// Four parts, wired as in the architecture's data flow a..f:
//   a  real_in       -> Discriminator block (forward)
//   b  noise_in      -> Generator block (forward)
//   c  Generator out -> Discriminator block (forward on artificial samples)
//   d  Discriminator scores -> Diff block (one per clock; score = output 0 of the last layer)
//   e  Diff Error_D  -> Discriminator block (backward)
//   f  Diff Error_G  -> Generator block (backward)
// The Control unit runs these steps as the cross-parallel pipeline. The Discriminator and
// Generator are two instances of the same parallel memory-free structure (gan_block); only
// the weights loaded through init_* differ. NL_D and NL_G (both 5 by default, the layer
// count of the design point) may differ; layer indices beyond a block's depth are ignored
// on init_* and read as undefined on dbg_*.
//
// Interface: load weights with init_* while idle, then pulse 'start' with n_iter. For each
// forward pass the top shows which pass of the batch it needs on real_pass / noise_pass
// (and the iteration on 'iter'); real_in / noise_in must carry that pass's S samples in the
// cycle the pass starts (hold them while the index is unchanged). 'done' is high when all
// iterations have finished. gen_out shows the latest generated samples, dbg_* reads back a
// weight column, err_* the last gradients and stats the pipeline event counters.
module gan_top #(
  parameter int NL_D        = 5,
  parameter int NL_G        = 5,
  parameter int S           = 32,
  parameter int N           = 32,
  parameter int M_BATCH     = 64,
  parameter int O_SHIFT     = 5,
  parameter int E_SHIFT     = 5,
  parameter int ALPHA_SHIFT = 8,
  parameter int ERR_SHIFT   = 4,
  localparam int NL_MAX     = (NL_D > NL_G) ? NL_D : NL_G
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [15:0]                 n_iter,
  output logic                        done,
  // weight load / read-back (sel: 0 = discriminator, 1 = generator)
  input  logic                        init_en,
  input  logic                        init_sel,
  input  logic [$clog2(NL_MAX)-1:0]   init_layer,
  input  logic [$clog2(N)-1:0]        init_col,
  input  gan_pkg::data_t              init_data [N],
  input  logic                        dbg_sel,
  input  logic [$clog2(NL_MAX)-1:0]   dbg_layer,
  input  logic [$clog2(N)-1:0]        dbg_col,
  output gan_pkg::data_t              dbg_data [N],
  // training data
  output logic [$clog2(M_BATCH/S+1)-1:0] real_pass,
  output logic [$clog2(M_BATCH/S+1)-1:0] noise_pass,
  output logic [15:0]                 iter,
  input  gan_pkg::data_t              real_in  [S][N],
  input  gan_pkg::data_t              noise_in [S][N],
  // observation
  output gan_pkg::data_t              gen_out  [S][N],
  output logic                        err_valid,
  output gan_pkg::grad_t              err_d,
  output gan_pkg::grad_t              err_g,
  output gan_pkg::stats_t             stats
);
  import gan_pkg::*;
  localparam int LW_D = $clog2(NL_D);
  localparam int LW_G = $clog2(NL_G);

  logic  d_fwd_start, d_src_fake, d_bwd_start, d_out_valid, d_bwd_done, d_busy;
  logic  g_fwd_start, g_bwd_start, g_out_valid, g_bwd_done, g_busy;
  grad_t d_err, g_err;
  data_t d_in   [S][N];
  data_t d_out  [S][N];
  data_t d_dbg  [N];
  data_t g_dbg  [N];
  logic  diff_clr, diff_valid, diff_fake;
  logic [$clog2(S)-1:0] diff_idx;
  logic [SCORE_W-1:0]   score;
  logic [$clog2(M_BATCH):0] real_cnt, fake_cnt;

  always_comb begin
    for (int s = 0; s < S; s++)
      for (int i = 0; i < N; i++)
        d_in[s][i] = d_src_fake ? gen_out[s][i] : real_in[s][i];
    for (int i = 0; i < N; i++) dbg_data[i] = dbg_sel ? g_dbg[i] : d_dbg[i];
  end

  // scores are ReLU outputs (0..127): the low SCORE_W bits address the LUTs
  assign score = d_out[diff_idx][0][SCORE_W-1:0];

  gan_block #(.NL(NL_D), .S(S), .N(N), .O_SHIFT(O_SHIFT), .E_SHIFT(E_SHIFT),
              .ALPHA_SHIFT(ALPHA_SHIFT), .ERR_SHIFT(ERR_SHIFT)) u_disc (
    .clk, .rst_n,
    .init_en(init_en && !init_sel && (32'(init_layer) < NL_D)),
    .init_layer(init_layer[LW_D-1:0]), .init_col, .init_data,
    .dbg_layer(dbg_layer[LW_D-1:0]), .dbg_col, .dbg_data(d_dbg),
    .fwd_start(d_fwd_start), .fwd_in(d_in), .out_vec(d_out), .out_valid(d_out_valid),
    .bwd_start(d_bwd_start), .bwd_err(d_err), .bwd_done(d_bwd_done), .busy(d_busy)
  );

  gan_block #(.NL(NL_G), .S(S), .N(N), .O_SHIFT(O_SHIFT), .E_SHIFT(E_SHIFT),
              .ALPHA_SHIFT(ALPHA_SHIFT), .ERR_SHIFT(ERR_SHIFT)) u_gen (
    .clk, .rst_n,
    .init_en(init_en && init_sel && (32'(init_layer) < NL_G)),
    .init_layer(init_layer[LW_G-1:0]), .init_col, .init_data,
    .dbg_layer(dbg_layer[LW_G-1:0]), .dbg_col, .dbg_data(g_dbg),
    .fwd_start(g_fwd_start), .fwd_in(noise_in), .out_vec(gen_out), .out_valid(g_out_valid),
    .bwd_start(g_bwd_start), .bwd_err(g_err), .bwd_done(g_bwd_done), .busy(g_busy)
  );

  diff_block #(.M_BATCH(M_BATCH), .SCORE_W(SCORE_W), .GRAD_W(GRAD_W), .FRAC(GRAD_FRAC)) u_diff (
    .clk, .rst_n, .clr(diff_clr),
    .in_valid(diff_valid), .in_fake(diff_fake), .in_score(score),
    .err_valid, .err_d, .err_g, .real_cnt, .fake_cnt
  );

  control_unit #(.M_BATCH(M_BATCH), .S(S), .GRAD_W(GRAD_W)) u_ctrl (
    .clk, .rst_n, .start, .n_iter, .done,
    .d_busy, .d_out_valid, .d_bwd_done, .d_fwd_start, .d_src_fake, .d_bwd_start, .d_err,
    .g_busy, .g_out_valid, .g_bwd_done, .g_fwd_start, .g_bwd_start, .g_err,
    .diff_clr, .diff_valid, .diff_fake, .diff_idx,
    .diff_err_valid(err_valid), .diff_err_d(err_d), .diff_err_g(err_g),
    .real_pass, .noise_pass, .iter, .stats
  );
endmodule
