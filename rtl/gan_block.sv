// gan_block: the parallel and memory-free structure, used both as the Discriminator block
// and as the Generator block (they differ only in the weights programmed into them).
//
// Parallel forward flow: NL layers, each made of S copies of the operation unit L_l that hold
// the same weights, so S samples pass through the layers side by side. Memory-free backward
// flow: per layer one weight-updating unit W_l and, for l < NL, one error unit E_l. No
// separate buffer holds weights or inter-layer signals: the layer outputs are programmed
// straight into W_l, the weights of L_{l+1} (transposed) straight into E_l, and the updated
// weights straight back into L_l.
//
// Sequence (all counts in clock cycles, P = max(S, N)):
//   fwd_start   L_1 runs on fwd_in in that cycle, L_l one cycle later than L_{l-1};
//               out_valid pulses NL cycles after fwd_start, out_vec then holds.
//   PROG        P cycles: row s of every W_l <- o_l of sample s; row c of every E_l <-
//               column c of L_{l+1}. busy stays high until it ends.
//   bwd_start   the diff-block gradient (16 bit) is scaled by 2^-ERR_SHIFT, saturated to 8
//               bits and broadcast as e_NL to every output and sample.
//   BWD_E       S + NL - 1 cycles: the E units form e_l for each sample, pipelined so that
//               E_{l-1} takes sample s one cycle after E_l.
//   BWD_W       N + 1 cycles: in cycle c every W_l runs on error column c; one cycle later
//               the new column c of w_l is programmed into all S copies of L_l.
//   bwd_done    pulses in the first idle cycle after BWD_W.
// A forward pass takes NL + P cycles of busy, a backward pass S + N + NL cycles.
// init_* programs a weight column of layer init_layer (all copies) while idle; dbg_* reads a
// column of copy 0 back. The broadcast of the scalar gradient and the fixed shifts are this
// design's choices; the order PROG -> BWD_E -> BWD_W follows the paper's timing sequence.
module gan_block #(
  parameter int NL          = 5,
  parameter int S           = 32,
  parameter int N           = 32,
  parameter int O_SHIFT     = 5,
  parameter int E_SHIFT     = 5,
  parameter int ALPHA_SHIFT = 8,
  parameter int ERR_SHIFT   = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // initial weight programming and read-back
  input  logic                      init_en,
  input  logic [$clog2(NL)-1:0]     init_layer,
  input  logic [$clog2(N)-1:0]      init_col,
  input  gan_pkg::data_t            init_data [N],
  input  logic [$clog2(NL)-1:0]     dbg_layer,
  input  logic [$clog2(N)-1:0]      dbg_col,
  output gan_pkg::data_t            dbg_data [N],
  // forward
  input  logic                      fwd_start,
  input  gan_pkg::data_t            fwd_in  [S][N],
  output gan_pkg::data_t            out_vec [S][N],
  output logic                      out_valid,
  // backward
  input  logic                      bwd_start,
  input  gan_pkg::grad_t            bwd_err,
  output logic                      bwd_done,
  output logic                      busy
);
  import gan_pkg::*;
  localparam int P   = (S > N) ? S : N;
  localparam int CW  = 16;

  typedef enum logic [2:0] {IDLE, FWD, PROG, BWD_E, BWD_W} state_t;
  state_t        state;
  logic [CW-1:0] cnt;

  // ---------------- forward flow ----------------
  data_t l_in   [NL][S][N];
  data_t l_out  [NL][S][N];
  data_t l_rd   [NL][S][N];
  logic  run_l  [NL];
  logic  run_q  [NL];
  logic  l_prog_en [NL];
  logic [$clog2(N)-1:0] l_prog_col [NL];
  data_t l_prog_data [NL][N];
  logic [$clog2(N)-1:0] l_rd_col [NL];

  // ---------------- backward flow ----------------
  data_t e_out  [NL][N];
  logic  e_vld  [NL];
  data_t e_col  [NL][S];
  logic  run_e  [NL];
  logic [$clog2(S)-1:0] idx_e [NL];
  logic [$clog2(S)-1:0] idx_q [NL];
  data_t e_in   [NL][N];
  data_t w_ecol [NL][S];
  data_t w_new  [NL][N];
  logic  w_vld  [NL];
  logic [$clog2(N)-1:0] w_col [NL];
  data_t err8;

  logic accept_fwd, accept_bwd;
  assign accept_fwd = (state == IDLE) && fwd_start;
  assign accept_bwd = (state == IDLE) && bwd_start && !fwd_start;
  assign busy       = (state != IDLE);

  always_comb begin
    run_l[0] = accept_fwd;
    for (int l = 1; l < NL; l++) run_l[l] = run_q[l-1];
  end
  assign out_valid = run_q[NL-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int l = 0; l < NL; l++) run_q[l] <= 1'b0;
    else        for (int l = 0; l < NL; l++) run_q[l] <= run_l[l];
  end

  always_comb begin
    for (int s = 0; s < S; s++)
      for (int i = 0; i < N; i++) begin
        l_in[0][s][i] = fwd_in[s][i];
        for (int l = 1; l < NL; l++) l_in[l][s][i] = l_out[l-1][s][i];
        out_vec[s][i] = l_out[NL-1][s][i];
      end
  end

  // weight programming of the operation units: initial load or updated column from W_l
  always_comb begin
    for (int l = 0; l < NL; l++) begin
      if (state == BWD_W) begin
        l_prog_en[l]  = w_vld[l];
        l_prog_col[l] = w_col[l];
        l_rd_col[l]   = w_col[l];
        for (int i = 0; i < N; i++) l_prog_data[l][i] = w_new[l][i];
      end else begin
        l_prog_en[l]  = (state == IDLE) && init_en && (init_layer == l[$clog2(NL)-1:0]);
        l_prog_col[l] = init_col;
        l_rd_col[l]   = (state == PROG) ? cnt[$clog2(N)-1:0] : dbg_col;
        for (int i = 0; i < N; i++) l_prog_data[l][i] = init_data[i];
      end
    end
  end

  always_comb
    for (int i = 0; i < N; i++) dbg_data[i] = l_rd[dbg_layer][0][i];

  for (genvar l = 0; l < NL; l++) begin : g_layer
    for (genvar s = 0; s < S; s++) begin : g_copy
      op_unit #(.N(N), .O_SHIFT(O_SHIFT)) u_l (
        .clk, .rst_n,
        .run(run_l[l]), .in_vec(l_in[l][s]), .out_vec(l_out[l][s]),
        .prog_col_en(l_prog_en[l]), .prog_col(l_prog_col[l]), .prog_col_data(l_prog_data[l]),
        .rd_col(l_rd_col[l]), .rd_col_data(l_rd[l][s])
      );
    end

    // W_l: rows = samples, programmed with o_l during PROG
    always_comb
      for (int s = 0; s < S; s++)
        w_ecol[l][s] = (l == NL - 1) ? err8 : e_col[l][s];

    wu_unit #(.N(N), .S(S), .ALPHA_SHIFT(ALPHA_SHIFT)) u_w (
      .clk, .rst_n,
      .prog_row_en((state == PROG) && (cnt < CW'(S))),
      .prog_row(cnt[$clog2(S)-1:0]),
      .prog_row_data(l_out[l][cnt[$clog2(S)-1:0]]),
      .run((state == BWD_W) && (cnt < CW'(N))),
      .run_col(cnt[$clog2(N)-1:0]),
      .e_col(w_ecol[l]),
      .w_old(l_rd[l][0]),
      .w_new(w_new[l]), .w_new_valid(w_vld[l]), .w_new_col(w_col[l])
    );

    if (l < NL - 1) begin : g_err
      // E_l: programmed with w^T of layer l+1 (row c <- column c of L_{l+1})
      always_comb begin
        if (l == NL - 2) begin
          run_e[l] = (state == BWD_E) && (cnt < CW'(S));
          idx_e[l] = cnt[$clog2(S)-1:0];
          for (int i = 0; i < N; i++) e_in[l][i] = err8;
        end else begin
          run_e[l] = e_vld[l+1];
          idx_e[l] = idx_q[l+1];
          for (int i = 0; i < N; i++) e_in[l][i] = e_out[l+1][i];
        end
      end

      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n)        idx_q[l] <= '0;
        else if (run_e[l]) idx_q[l] <= idx_e[l];

      err_unit #(.N(N), .S(S), .E_SHIFT(E_SHIFT)) u_e (
        .clk, .rst_n,
        .prog_row_en((state == PROG) && (cnt < CW'(N))),
        .prog_row(cnt[$clog2(N)-1:0]),
        .prog_row_data(l_rd[l+1][0]),
        .run(run_e[l]), .run_idx(idx_e[l]), .e_in(e_in[l]),
        .e_out(e_out[l]), .e_out_valid(e_vld[l]),
        .col_sel(cnt[$clog2(N)-1:0]), .e_col(e_col[l])
      );
    end else begin : g_no_err
      always_comb begin
        run_e[l] = 1'b0;
        idx_e[l] = '0;
        e_vld[l] = 1'b0;
        idx_q[l] = '0;
        for (int i = 0; i < N; i++) begin
          e_in[l][i]  = '0;
          e_out[l][i] = '0;
        end
        for (int s = 0; s < S; s++) e_col[l][s] = '0;
      end
    end
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      cnt      <= '0;
      err8     <= '0;
      bwd_done <= 1'b0;
    end else begin
      bwd_done <= 1'b0;
      unique case (state)
        IDLE: begin
          cnt <= '0;
          if (accept_fwd) state <= FWD;
          else if (accept_bwd) begin
            state <= BWD_E;
            err8  <= DATA_W'(sat_s(48'(bwd_err >>> ERR_SHIFT), DATA_W));
          end
        end
        FWD: if (run_q[NL-1]) begin state <= PROG; cnt <= '0; end
        PROG: begin
          if (cnt == CW'(P - 1)) begin state <= IDLE; cnt <= '0; end
          else cnt <= cnt + 1'b1;
        end
        BWD_E: begin
          if (cnt == CW'(S + NL - 2)) begin state <= BWD_W; cnt <= '0; end
          else cnt <= cnt + 1'b1;
        end
        BWD_W: begin
          if (cnt == CW'(N)) begin state <= IDLE; cnt <= '0; bwd_done <= 1'b1; end
          else cnt <= cnt + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // The paper's structure needs at least two layers (one error unit).
  initial assert (NL >= 2) else $error("gan_block needs NL >= 2");
  // A forward or backward request while busy is a protocol error of the caller.
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                    busy |-> !(fwd_start || bwd_start));
endmodule
