// control_unit: sequencer of the cross-parallel pipeline.
//
// Two cooperating state machines, one per block. Per training iteration (batch of M_BATCH
// samples, processed as P = M_BATCH / S passes of S samples):
//   Discriminator: a + d1   forward passes on real data; each pass's S scores are streamed
//                           into the diff block (one per clock) and stored;
//                  wait     idle until the generator has a pass of artificial samples;
//                  c + d2   forward passes on the generator's output, scores streamed into
//                           the diff block, which then produces Error_D and Error_G (d3);
//                  e        backward pass with Error_D; then the next iteration's real
//                           passes start at once, even while the generator is still updating.
//   Generator:     b        forward pass on noise; it holds its output until the
//                           discriminator has taken it (c), then runs the next pass;
//                  f        backward pass with Error_G once the diff block has produced it.
// The only interlocks are the data dependencies b -> c and the rule that a block does not
// start a new operation before its weight update has finished, so a runs in parallel with
// b, e with f, and the next iteration's a with the current f; the two blocks meet again at
// the first c of the next iteration. All commands are single-cycle pulses issued only when
// the target block is not busy. d_src_fake selects the discriminator input (real data or
// generator output) in the cycle of d_fwd_start. diff_valid / diff_fake / diff_idx stream
// the discriminator's per-sample score to the diff block. stats counts the events above.
// The split of a batch into passes and the exact event definitions are this design's choices.
module control_unit #(
  parameter int M_BATCH = 64,
  parameter int S       = 32,
  parameter int GRAD_W  = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [15:0]                 n_iter,
  output logic                        done,
  // discriminator block
  input  logic                        d_busy,
  input  logic                        d_out_valid,
  input  logic                        d_bwd_done,
  output logic                        d_fwd_start,
  output logic                        d_src_fake,
  output logic                        d_bwd_start,
  output logic signed [GRAD_W-1:0]    d_err,
  // generator block
  input  logic                        g_busy,
  input  logic                        g_out_valid,
  input  logic                        g_bwd_done,
  output logic                        g_fwd_start,
  output logic                        g_bwd_start,
  output logic signed [GRAD_W-1:0]    g_err,
  // diff block
  output logic                        diff_clr,
  output logic                        diff_valid,
  output logic                        diff_fake,
  output logic [$clog2(S)-1:0]        diff_idx,
  input  logic                        diff_err_valid,
  input  logic signed [GRAD_W-1:0]    diff_err_d,
  input  logic signed [GRAD_W-1:0]    diff_err_g,
  // data requests: pass index within the batch, iteration number
  output logic [$clog2(M_BATCH/S+1)-1:0] real_pass,
  output logic [$clog2(M_BATCH/S+1)-1:0] noise_pass,
  output logic [15:0]                 iter,
  output gan_pkg::stats_t             stats
);
  localparam int P  = M_BATCH / S;
  localparam int PW = $clog2(P + 1);

  typedef enum logic [3:0] {D_IDLE, D_REAL, D_REAL_W, D_WAITG, D_FAKE_W, D_DIFF, D_BACK,
                            D_BACK_W, D_FIN} d_state_t;
  typedef enum logic [2:0] {G_IDLE, G_FWD, G_FWD_W, G_HOLD, G_ERR, G_BACK, G_BACK_W,
                            G_FIN} g_state_t;
  d_state_t dst;
  g_state_t gst;

  logic [PW-1:0] dp, gq;
  logic [15:0]   d_iter, g_iter;
  logic          d_err_pend, g_err_pend;
  logic          strm_act, strm_fake;
  logic [$clog2(S)-1:0] strm_cnt;
  logic          running;

  // ---- command decode (combinational) ----
  logic g_ready;
  assign g_ready     = (gst == G_HOLD);
  assign d_fwd_start = ((dst == D_REAL) && !d_busy && !strm_act) ||
                       ((dst == D_WAITG) && g_ready && !d_busy && !strm_act);
  assign d_src_fake  = (dst == D_WAITG);
  assign d_bwd_start = (dst == D_BACK) && !d_busy && !strm_act;
  assign g_fwd_start = (gst == G_FWD) && !g_busy;
  assign g_bwd_start = (gst == G_BACK) && !g_busy;
  assign diff_valid  = strm_act;
  assign diff_fake   = strm_fake;
  assign diff_idx    = strm_cnt;
  assign real_pass   = dp;
  assign noise_pass  = gq;
  assign iter        = d_iter;
  assign done        = (dst == D_FIN) && (gst == G_FIN);

  // ---- discriminator side ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dst <= D_IDLE; dp <= '0; d_iter <= '0; diff_clr <= 1'b0;
      strm_act <= 1'b0; strm_fake <= 1'b0; strm_cnt <= '0;
    end else begin
      diff_clr <= 1'b0;
      // score stream into the diff block
      if (d_out_valid) begin
        strm_act <= 1'b1; strm_cnt <= '0; strm_fake <= (dst == D_FAKE_W);
      end else if (strm_act) begin
        if (strm_cnt == ($clog2(S))'(S - 1)) strm_act <= 1'b0;
        else strm_cnt <= strm_cnt + 1'b1;
      end
      unique case (dst)
        D_IDLE:   if (start) begin dst <= D_REAL; dp <= '0; d_iter <= '0; diff_clr <= 1'b1; end
        D_REAL:   if (d_fwd_start) dst <= D_REAL_W;
        D_REAL_W: if (d_out_valid) begin
                    if (dp == PW'(P - 1)) begin dst <= D_WAITG; dp <= '0; end
                    else begin dst <= D_REAL; dp <= dp + 1'b1; end
                  end
        D_WAITG:  if (d_fwd_start) dst <= D_FAKE_W;
        D_FAKE_W: if (d_out_valid) begin
                    if (dp == PW'(P - 1)) begin dst <= D_DIFF; dp <= '0; end
                    else begin dst <= D_WAITG; dp <= dp + 1'b1; end
                  end
        D_DIFF:   if (d_err_pend) dst <= D_BACK;
        D_BACK:   if (d_bwd_start) dst <= D_BACK_W;
        D_BACK_W: if (d_bwd_done) begin
                    d_iter <= d_iter + 1'b1;
                    if (d_iter + 1'b1 == n_iter) dst <= D_FIN;
                    else begin dst <= D_REAL; diff_clr <= 1'b1; end
                  end
        D_FIN:    if (done) dst <= D_IDLE;
        default:  dst <= D_IDLE;
      endcase
    end
  end

  // ---- generator side ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gst <= G_IDLE; gq <= '0; g_iter <= '0;
    end else begin
      unique case (gst)
        G_IDLE:   if (start) begin gst <= G_FWD; gq <= '0; g_iter <= '0; end
        G_FWD:    if (g_fwd_start) gst <= G_FWD_W;
        G_FWD_W:  if (g_out_valid) gst <= G_HOLD;
        G_HOLD:   if (d_fwd_start && d_src_fake) begin  // the discriminator took this pass (c)
                    if (gq == PW'(P - 1)) begin gst <= G_ERR; gq <= '0; end
                    else begin gst <= G_FWD; gq <= gq + 1'b1; end
                  end
        G_ERR:    if (g_err_pend) gst <= G_BACK;
        G_BACK:   if (g_bwd_start) gst <= G_BACK_W;
        G_BACK_W: if (g_bwd_done) begin
                    g_iter <= g_iter + 1'b1;
                    if (g_iter + 1'b1 == n_iter) gst <= G_FIN;
                    else gst <= G_FWD;
                  end
        G_FIN:    if (done) gst <= G_IDLE;
        default:  gst <= G_IDLE;
      endcase
    end
  end

  // ---- gradients from the diff block (d3 -> e1 / f1) ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_err_pend <= 1'b0; g_err_pend <= 1'b0; d_err <= '0; g_err <= '0;
    end else begin
      if (diff_err_valid) begin
        d_err <= diff_err_d; g_err <= diff_err_g;
        d_err_pend <= 1'b1; g_err_pend <= 1'b1;
      end else begin
        if (d_bwd_start) d_err_pend <= 1'b0;
        if (g_bwd_start) g_err_pend <= 1'b0;
      end
    end
  end

  // ---- event counters ----
  logic d_real_phase, g_fwd_phase, d_back_phase, g_back_phase;
  assign d_real_phase = (dst == D_REAL) || (dst == D_REAL_W);
  assign g_fwd_phase  = (gst == G_FWD) || (gst == G_FWD_W) || (gst == G_HOLD);
  assign d_back_phase = (dst == D_BACK) || (dst == D_BACK_W);
  assign g_back_phase = (gst == G_BACK) || (gst == G_BACK_W);
  assign running      = (dst != D_IDLE) && !done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats <= '0;
    end else if (start && dst == D_IDLE) begin
      stats <= '0;
    end else if (running) begin
      stats.cycles <= stats.cycles + 1;
      if (d_busy)           stats.d_busy    <= stats.d_busy + 1;
      if (g_busy)           stats.g_busy    <= stats.g_busy + 1;
      if (d_busy && g_busy) stats.both_busy <= stats.both_busy + 1;
      if (d_real_phase && d_busy && g_fwd_phase && g_busy) stats.ab_overlap <= stats.ab_overlap + 1;
      if (d_back_phase && d_busy && g_back_phase && g_busy) stats.ef_overlap <= stats.ef_overlap + 1;
      if (dst == D_WAITG && !g_ready) stats.d_wait_g <= stats.d_wait_g + 1;
      if (d_fwd_start && dst == D_REAL && dp == '0 && g_back_phase)
        stats.async_starts <= stats.async_starts + 1;
      if (d_bwd_done && dst == D_BACK_W) stats.iters <= stats.iters + 1;
    end
  end

  initial assert (P * S == M_BATCH) else $error("control_unit: M_BATCH must be a multiple of S");
  // A stream must end before the discriminator produces new scores.
  a_stream_done: assert property (@(posedge clk) disable iff (!rst_n)
                                  d_out_valid |-> !strm_act);
endmodule
