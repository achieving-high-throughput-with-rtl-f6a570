// calc_grad1 -- backward pass of the second Conv1D layer (4->8 channels,
// kernel 9, stride 2, padding 4).
//
// For one output with error e[o] and the window of the 9 layer-0 positions
// that produced it (window slot k holds position 2m+k-4):
//   weight gradient  dW1[i][o][k] += e[o] * a[k][i]
//   bias gradient    dB1[o]       += e[o]
//   propagated error delta[k][i]   = relu'(h[k][i]) * sum_o e[o] * w1[i][o][k]
// The gradients are accumulated over a sequence; `clr` starts a new sum with
// the current term. delta is the contribution of this one output to the error
// of the 9 positions; calc_grad0 consumes it directly (the first-layer
// gradient is linear in the error and the ReLU mask is fixed per position,
// so summing contributions gives the same result as first completing the
// error of each position).
//
// Fixed point: e and a have 16 fraction bits, w1 20; gradients are kept with
// 24 fraction bits in 48-bit accumulators; delta has 16 fraction bits and is
// saturated to 24 bits. delta is combinational, the accumulators update on
// the clock edge when en is high.
//
// Follows the architecture: backward pass of the second layer with its
// weight and bias gradients and the error passed to the first layer. Own
// choices: propagating one output's error contribution at a time instead of
// buffering complete position errors, and all word widths beyond 24 bit.
module calc_grad1
  import eq_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,
  input  logic                          clr,
  input  tw_t  [C2-1:0]                 e,
  input  pos_rec_t [K-1:0]              win,
  input  tw_t  [C1-1:0][C2-1:0][K-1:0]  w1,
  output tw_t  [K-1:0][C1-1:0]          delta,
  output g_t   [C1-1:0][C2-1:0][K-1:0]  gw1,
  output g_t   [C2-1:0]                 gb1
);
  g_t [C1-1:0][C2-1:0][K-1:0] tw;
  g_t [C2-1:0]                tb;

  always_comb begin
    for (int k = 0; k < K; k++)
      for (int i = 0; i < C1; i++) begin
        logic signed [63:0] s;
        s = '0;
        for (int o = 0; o < C2; o++)
          s += 64'($signed(e[o])) * 64'($signed(w1[i][o][k]));
        delta[k][i] = win[k].act[i] ? tw_t'(sat_s(s >>> TW_F, T_W)) : '0;
      end
    for (int i = 0; i < C1; i++)
      for (int o = 0; o < C2; o++)
        for (int k = 0; k < K; k++)
          tw[i][o][k] = g_t'((64'($signed(e[o])) * 64'($signed(win[k].a[i]))) >>> (2*TA_F - G_F));
    for (int o = 0; o < C2; o++)
      tb[o] = g_t'(64'($signed(e[o])) <<< (G_F - TA_F));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < C1; i++) gw1[i] <= '0;
      gb1 <= '0;
    end else if (en) begin
      for (int i = 0; i < C1; i++)
        for (int o = 0; o < C2; o++)
          for (int k = 0; k < K; k++)
            gw1[i][o][k] <= clr ? tw[i][o][k] : g_t'(gw1[i][o][k] + tw[i][o][k]);
      for (int o = 0; o < C2; o++)
        gb1[o] <= clr ? tb[o] : g_t'(gb1[o] + tb[o]);
    end
  end
endmodule
