// cnn_training -- one training instance of the equalizer: forward pass, loss,
// backward pass and per-sequence gradient of one lane.
//
// Pipeline: train_conv0 (layer-0 forward, one position per beat) ->
// train_conv1 (layer-1 forward, window of forward data, one output per two
// beats) -> output register. When an output leaves the instance (m_valid &&
// m_ready), loss_mse forms the error against the known targets and
// calc_grad1 / calc_grad0 add this output's share of the gradients of both
// layers in the same cycle. The first output of a sequence restarts the sums.
// On the second clock edge after the last output of a sequence is accepted,
// the finished gradient set is copied to g and g_valid pulses for one cycle; g then stays
// unchanged for a full sequence, which gives the weight memory time to
// collect the gradients of all instances.
//
// The outputs of the instance are equalized symbols like those of the
// inference lanes (converted to the 16-bit output format with 10 fraction
// bits, saturated). Weights come from the weight memory at training
// precision; layer 0 uses them as published, layer 1 adopts them at the start
// of each sequence (see train_conv1).
//
// Interface: valid/ready stream in (8 samples + 4 targets per beat) and out
// (8 symbols every second beat); same timing as cnn_inference so that both
// can run in lock step.
//
// Follows the architecture: forward pass, loss, backward pass and gradient
// accumulation of one training instance with about 24-bit words, fully
// unrolled; P_T instances give the training parallelism. Own choices: the
// exact pipeline (gradient work done in the cycle an output leaves), the
// gradient hand-over protocol and the output conversion. Timing: g_valid
// pulses 2 cycles after the last output of a sequence is taken.
module cnn_training
  import eq_pkg::*;
#(
  parameter int SEQ_POS = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  s_valid,
  output logic                  s_ready,
  input  sample_t [SPB-1:0]     s_x,
  input  sample_t [SYB-1:0]     s_t,
  input  tweights_t             w,
  output logic                  m_valid,
  input  logic                  m_ready,
  output z_t      [C2-1:0]      m_z,
  output logic                  g_valid,
  output grads_t                g
);
  logic                         p_valid, p_ready;
  pos_rec_t                     p_rec;
  tw_t  [C2-1:0]                z;
  sample_t [C2-1:0]             t;
  pos_rec_t [K-1:0]             win;
  tw_t  [C1-1:0][C2-1:0][K-1:0] w1_used;
  logic                         first, last;
  tw_t  [C2-1:0]                e;
  tw_t  [K-1:0][C1-1:0]         delta;
  logic                         take;
  logic                         done_d;
  grads_t                       acc;

  train_conv0 #(.SEQ_POS(SEQ_POS)) u_fwd0 (
    .clk, .rst_n,
    .s_valid, .s_ready, .s_x, .s_t,
    .w0(w.w0), .b0(w.b0),
    .m_valid(p_valid), .m_ready(p_ready), .m_pos(p_rec)
  );

  train_conv1 #(.SEQ_POS(SEQ_POS)) u_fwd1 (
    .clk, .rst_n,
    .s_valid(p_valid), .s_ready(p_ready), .s_pos(p_rec),
    .w1(w.w1), .b1(w.b1),
    .m_valid, .m_ready,
    .m_z(z), .m_t(t), .m_win(win), .m_w1(w1_used),
    .m_first(first), .m_last(last)
  );

  assign take = m_valid && m_ready;

  always_comb
    for (int o = 0; o < C2; o++)
      m_z[o] = z_t'(sat_s(64'($signed(z[o])) >>> (TA_F - Z_F), Z_W));

  loss_mse u_loss (.z, .t, .e);

  calc_grad1 u_grad1 (
    .clk, .rst_n, .en(take), .clr(first),
    .e, .win, .w1(w1_used),
    .delta, .gw1(acc.w1), .gb1(acc.b1)
  );

  calc_grad0 u_grad0 (
    .clk, .rst_n, .en(take), .clr(first),
    .delta, .win,
    .gw0(acc.w0), .gb0(acc.b0)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_d  <= 1'b0;
      g_valid <= 1'b0;
      g.w0    <= '0;
      g.b0    <= '0;
      for (int i = 0; i < C1; i++) g.w1[i] <= '0;
      g.b1    <= '0;
    end else begin
      done_d  <= take && last;
      g_valid <= done_d;
      if (done_d) g <= acc;
    end
  end
endmodule
