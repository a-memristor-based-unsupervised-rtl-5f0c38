// diff_block: computes the GAN loss gradients Error_D and Error_G of one batch.
//
// Made of LUT1, LUT2, the memory unit M and two accumulating adders. The discriminator
// sends its scores one per clock. A real-sample score D(x_i) (in_fake = 0) is looked up in
// LUT1 and the result stored in M[i]. A fake-sample score D(G(z_i)) (in_fake = 1) is looked
// up in LUT2 while M[i] is read; adder 1 accumulates the LUT2 values and gives
//   Error_G = (1/m) * sum_i LUT2(D(G(z_i)))
// and adder 2 accumulates the stored values and adds adder 1's result:
//   Error_D = (1/m) * sum_i LUT1(D(x_i)) + Error_G.
// Timing: LUT reads and the M read take one clock, the adders one more. err_valid pulses
// two clocks after the m-th fake score; err_d and err_g then hold until 'clr'. All m real
// scores of a batch must arrive before the first fake score (the pipeline order d1 before
// d2); fake sample i is paired with M[i] in arrival order. 'clr' starts a new batch.
module diff_block #(
  parameter int M_BATCH = 64,
  parameter int SCORE_W = 7,
  parameter int GRAD_W  = 16,
  parameter int FRAC    = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic                       in_valid,
  input  logic                       in_fake,
  input  logic [SCORE_W-1:0]         in_score,
  output logic                       err_valid,
  output logic signed [GRAD_W-1:0]   err_d,
  output logic signed [GRAD_W-1:0]   err_g,
  output logic [$clog2(M_BATCH):0]   real_cnt,
  output logic [$clog2(M_BATCH):0]   fake_cnt
);
  localparam int AW = $clog2(M_BATCH);

  logic signed [GRAD_W-1:0] lut1_q, lut2_q, m_q;
  logic                     real_q, fake_q, last_q;
  logic [AW-1:0]            widx_q;
  logic                     take_real, take_fake;

  assign take_real = in_valid && !in_fake && (real_cnt < ($clog2(M_BATCH)+1)'(M_BATCH));
  assign take_fake = in_valid &&  in_fake && (fake_cnt < ($clog2(M_BATCH)+1)'(M_BATCH));

  diff_lut #(.ADDR_W(SCORE_W), .DATA_W(GRAD_W), .FRAC(FRAC), .KIND(1)) u_lut1 (
    .clk, .addr(in_score), .data(lut1_q));
  diff_lut #(.ADDR_W(SCORE_W), .DATA_W(GRAD_W), .FRAC(FRAC), .KIND(2)) u_lut2 (
    .clk, .addr(in_score), .data(lut2_q));

  diff_mem #(.DEPTH(M_BATCH), .DATA_W(GRAD_W)) u_mem (
    .clk, .rst_n,
    .we(real_q), .waddr(widx_q), .wdata(lut1_q),
    .raddr(fake_cnt[AW-1:0]), .rdata(m_q));

  diff_adder #(.DATA_W(GRAD_W), .SHIFT(AW)) u_add_g (
    .clk, .rst_n, .clr, .add_en(fake_q), .a(lut2_q), .offset('0), .result(err_g));
  diff_adder #(.DATA_W(GRAD_W), .SHIFT(AW)) u_add_d (
    .clk, .rst_n, .clr, .add_en(fake_q), .a(m_q), .offset(err_g), .result(err_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      real_cnt <= '0; fake_cnt <= '0;
      real_q <= 1'b0; fake_q <= 1'b0; last_q <= 1'b0; widx_q <= '0;
      err_valid <= 1'b0;
    end else begin
      err_valid <= last_q;
      if (clr) begin
        real_cnt <= '0; fake_cnt <= '0;
        real_q <= 1'b0; fake_q <= 1'b0; last_q <= 1'b0;
      end else begin
        real_q <= take_real;
        fake_q <= take_fake;
        last_q <= take_fake && (fake_cnt == ($clog2(M_BATCH)+1)'(M_BATCH - 1));
        if (take_real) begin
          widx_q   <= real_cnt[AW-1:0];
          real_cnt <= real_cnt + 1'b1;
        end
        if (take_fake) fake_cnt <= fake_cnt + 1'b1;
      end
    end
  end

  initial assert ((1 << AW) == M_BATCH) else $error("diff_block: M_BATCH must be a power of two");
  // d1 before d2: a fake score is paired with a stored real one.
  a_real_first: assert property (@(posedge clk) disable iff (!rst_n)
                                 (in_valid && in_fake && !clr) |-> (real_cnt > fake_cnt));
endmodule
