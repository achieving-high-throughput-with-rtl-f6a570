// weight_memory -- shared weights of the equalizer and the weight update.
//
// Holds the master copy of all 336 trainable parameters at training precision
// (24 bit, 20 fraction bits). Every training instance computes its gradient
// from the same published weights; when all PT instances have delivered the
// gradient of a sequence (g_valid), their sum is applied in one step:
//   W <- W - 2^-LR_SHIFT * sum_j g_j
// (LR_SHIFT = 10 approximates the learning rate 0.001; gradients carry 24
// fraction bits, so the sum is shifted right by 24 - 20 + LR_SHIFT and the
// result saturated to 24 bits). With train_en low the gradients are dropped:
// the equalizer keeps running with fixed weights.
//
// The layers do not read the master copy: they read a published copy that is
// refreshed from the master only on the `publish` strobe, which the top
// raises when the last beat of a sequence enters the equalizer. Together with
// the layers adopting weights at the start of a sequence this makes the weight
// set constant over every sequence: the gradient of sequence s, which is
// complete a few beats into sequence s+1, is used from sequence s+2 on.
// q_pub is the published copy quantized for the inference module: weights
// keep 4 fraction bits (6 bit, saturated), biases 10 (16 bit, saturated), by
// dropping low bits (rounding toward minus infinity).
//
// A configuration write (cfg_we) sets one parameter in the master and the
// published copy at once (address map in eq_pkg) and is meant for loading
// initial weights. upd_count counts applied updates.
//
// Timing: an update takes effect in the master copy on the clock edge where
// the last gradient of a round arrives; the published copy follows on the
// next publish strobe. Follows the architecture: one weight set shared by all
// inference and training lanes, updated by gradient descent with learning
// rate 0.001 from the gradients of all P_T instances computed on the same
// weights. Own choices: power-of-two learning rate, double buffering,
// configuration port, quantization by truncation.
module weight_memory
  import eq_pkg::*;
#(
  parameter int PT       = 2,
  parameter int LR_SHIFT = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [8:0]           cfg_addr,
  input  tw_t                  cfg_data,
  input  logic                 train_en,
  input  logic   [PT-1:0]      g_valid,
  input  grads_t [PT-1:0]      g,
  input  logic                 publish,
  output tweights_t            w_pub,
  output qweights_t            q_pub,
  output logic [31:0]          upd_count
);
  localparam int N = N_PARAM;

  tw_t  [N-1:0]  wm;      // master copy
  tw_t  [N-1:0]  pub;     // published copy
  logic [PT-1:0] got;
  logic          all_done;
  g_t   [PT-1:0][N-1:0] gf;

  // Flatten a gradient set into address order.
  function automatic g_t [N-1:0] flat_g(input grads_t x);
    g_t [N-1:0] f;
    for (int c = 0; c < C1; c++) begin
      for (int k = 0; k < K; k++) f[c*K + k] = x.w0[c][k];
      f[A_B0 + c] = x.b0[c];
    end
    for (int i = 0; i < C1; i++)
      for (int o = 0; o < C2; o++)
        for (int k = 0; k < K; k++) f[A_W1 + (i*C2 + o)*K + k] = x.w1[i][o][k];
    for (int o = 0; o < C2; o++) f[A_B1 + o] = x.b1[o];
    return f;
  endfunction

  always_comb begin
    for (int j = 0; j < PT; j++) gf[j] = flat_g(g[j]);
    all_done = &(got | g_valid);
    for (int c = 0; c < C1; c++) begin
      for (int k = 0; k < K; k++) begin
        w_pub.w0[c][k] = pub[c*K + k];
        q_pub.w0[c][k] = qw_t'(sat_s(64'($signed(pub[c*K + k])) >>> (TW_F - QW_F), QW_W));
      end
      w_pub.b0[c] = pub[A_B0 + c];
      q_pub.b0[c] = qb_t'(sat_s(64'($signed(pub[A_B0 + c])) >>> (TW_F - X_F - QW_F), QB_W));
    end
    for (int i = 0; i < C1; i++)
      for (int o = 0; o < C2; o++)
        for (int k = 0; k < K; k++) begin
          w_pub.w1[i][o][k] = pub[A_W1 + (i*C2 + o)*K + k];
          q_pub.w1[i][o][k] = qw_t'(sat_s(64'($signed(pub[A_W1 + (i*C2 + o)*K + k])) >>> (TW_F - QW_F), QW_W));
        end
    for (int o = 0; o < C2; o++) begin
      w_pub.b1[o] = pub[A_B1 + o];
      q_pub.b1[o] = qb_t'(sat_s(64'($signed(pub[A_B1 + o])) >>> (TW_F - A_F - QW_F), QB_W));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wm        <= '0;
      pub       <= '0;
      got       <= '0;
      upd_count <= '0;
    end else begin
      if (publish) pub <= wm;
      if (all_done) begin
        got <= '0;
        if (train_en) begin
          for (int a = 0; a < N; a++) begin
            logic signed [63:0] s;
            s = '0;
            for (int j = 0; j < PT; j++) s += 64'($signed(gf[j][a]));
            wm[a] <= tw_t'(sat_s(64'($signed(wm[a])) - (s >>> (G_F - TW_F + LR_SHIFT)), T_W));
          end
          upd_count <= upd_count + 1;
        end
      end else begin
        got <= got | g_valid;
      end
      if (cfg_we && int'(cfg_addr) < N) begin
        wm[cfg_addr]  <= cfg_data;
        pub[cfg_addr] <= cfg_data;
      end
    end
  end
endmodule
