// calc_grad0 -- backward pass of the first Conv1D layer (1->4 channels,
// kernel 9, stride 8, padding 4).
//
// For the error contribution delta[p][c] of one layer-1 output to the 9
// window positions p, and the input taps x[p][k] = x[8p+k-4] stored with each
// position:
//   weight gradient dW0[c][k] += sum_p delta[p][c] * x[p][k]
//   bias gradient   dB0[c]    += sum_p delta[p][c]
// accumulated over a sequence; `clr` starts a new sum with the current term.
// No error is propagated further, since the input needs no gradient.
//
// Fixed point: delta 16 fraction bits, x 6; gradients kept with 24 fraction
// bits in 48-bit accumulators. Accumulators update on the clock edge when en
// is high.
//
// Follows the architecture: per-layer gradient calculation of the backward
// pass, fully unrolled. Own choices: the accumulate-per-output scheme, the
// 48-bit accumulators and their fraction bits.
module calc_grad0
  import eq_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  clr,
  input  tw_t  [K-1:0][C1-1:0]  delta,
  input  pos_rec_t [K-1:0]      win,
  output g_t   [C1-1:0][K-1:0]  gw0,
  output g_t   [C1-1:0]         gb0
);
  g_t [C1-1:0][K-1:0] tw;
  g_t [C1-1:0]        tb;

  always_comb begin
    for (int c = 0; c < C1; c++) begin
      logic signed [63:0] sb;
      sb = '0;
      for (int k = 0; k < K; k++) begin
        logic signed [63:0] s;
        s = '0;
        for (int p = 0; p < K; p++)
          s += 64'($signed(delta[p][c])) * 64'($signed(win[p].x[k]));
        tw[c][k] = g_t'(s <<< (G_F - TA_F - X_F));
      end
      for (int p = 0; p < K; p++)
        sb += 64'($signed(delta[p][c]));
      tb[c] = g_t'(sb <<< (G_F - TA_F));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gw0 <= '0;
      gb0 <= '0;
    end else if (en) begin
      for (int c = 0; c < C1; c++) begin
        for (int k = 0; k < K; k++)
          gw0[c][k] <= clr ? tw[c][k] : g_t'(gw0[c][k] + tw[c][k]);
        gb0[c] <= clr ? tb[c] : g_t'(gb0[c] + tb[c]);
      end
    end
  end
endmodule
