// conv1_bp -- second Conv1D layer of the inference module, batch-parallel,
// with two multiplications per DSP.
//
// Per lane: 4 input channels, 8 output channels, kernel 9, padding 4,
// stride 2, no activation. Output position m of a sequence is
//   z[o][m] = b1[o] + sum_i sum_k w1[i][o][k] * a[i][2m + k - 4]
// and its 8 channels are the 8 equalized symbols 8m..8m+7.
//
// Each lane keeps a 9-position sliding window of layer-0 activations; the
// window shifts by one position per accepted input. An output is produced
// whenever the window centre is an even position of its sequence, i.e. one
// output per two inputs. Padding is realized by masking taps whose position
// lies outside the centre's sequence, so consecutive sequences stream through
// without stall cycles; the last two outputs of a sequence are emitted while
// the first positions of the next sequence enter the window.
//
// The B lanes share one weight set. Lanes 2p and 2p+1 are multiplied by the
// same weight in one dsp_dual_mult (activations are unsigned after ReLU,
// weights signed); with an odd B the last lane uses a plain multiplier.
//
// Weights: the layer adopts the weights on its input when it computes the
// first output (centre position 0) of a sequence and holds them for the rest
// of the sequence, so a sequence never mixes two weight sets.
//
// Interface: valid/ready in (s_a[n][i], one position per lane) and out
// (m_z[n][o], 16 bit signed with 10 fraction bits, saturated). The output
// register is loaded in the cycle the completing input is accepted; latency
// 1 cycle from that input.
//
// Follows the architecture: batch-parallel layer with two products of the
// same weight packed into one DSP (6-bit weights, 10-bit activations). Own
// choices: the window/masking scheme for back-to-back sequences, the weight
// adoption point, the output format and saturation.
module conv1_bp
  import eq_pkg::*;
#(
  parameter int B       = 32,
  parameter int SEQ_POS = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          s_valid,
  output logic                          s_ready,
  input  act_t [B-1:0][C1-1:0]          s_a,
  input  qw_t  [C1-1:0][C2-1:0][K-1:0]  w1,
  input  qb_t  [C2-1:0]                 b1,
  output logic                          m_valid,
  input  logic                          m_ready,
  output z_t   [B-1:0][C2-1:0]          m_z
);
  localparam int CW = $clog2(SEQ_POS);
  localparam int RW = A_W + QW_W;
  localparam int NP = B / 2;

  act_t [B-1:0][K-1:0][C1-1:0]  win;       // slot K-1 holds the newest position
  act_t [B-1:0][K-1:0][C1-1:0]  dmask;     // shifted window, out-of-sequence taps zeroed
  qw_t  [C1-1:0][C2-1:0][K-1:0] w1_l;      // weights held for the current sequence
  qb_t  [C2-1:0]                b1_l;
  qw_t  [C1-1:0][C2-1:0][K-1:0] wu;        // weights used by this output
  qb_t  [C2-1:0]                bu;
  logic [CW-1:0]                cnt;       // sequence index of the newest position
  logic [CW-1:0]                nidx, ci;  // after the shift: newest index, centre index
  logic [3:0]                   nseen;     // positions seen since reset (saturating)
  logic                         accept, fire;
  logic [K-1:0]                 tap_ok;
  z_t   [B-1:0][C2-1:0]         z_next;
  logic signed [RW-1:0]         prod [B][C2][C1][K];

  assign s_ready = !m_valid || m_ready;
  assign accept  = s_valid && s_ready;

  always_comb begin
    nidx = (cnt == CW'(SEQ_POS-1)) ? '0 : cnt + 1'b1;
    ci   = (nidx >= CW'(PAD)) ? nidx - CW'(PAD) : CW'(int'(nidx) + SEQ_POS - PAD);
    fire = accept && (nseen >= 4'(PAD)) && !ci[0];
    for (int t = 0; t < K; t++) begin
      int p;
      p = int'(ci) + t - PAD;
      tap_ok[t] = (p >= 0) && (p < SEQ_POS);
    end
    for (int n = 0; n < B; n++)
      for (int t = 0; t < K; t++)
        dmask[n][t] = !tap_ok[t] ? '0 : (t == K-1) ? s_a[n] : win[n][t+1];
    wu = (ci == '0) ? w1 : w1_l;
    bu = (ci == '0) ? b1 : b1_l;
  end

  // Two lanes per multiplier.
  for (genvar p = 0; p < NP; p++) begin : g_pair
    for (genvar o = 0; o < C2; o++) begin : g_o
      for (genvar i = 0; i < C1; i++) begin : g_i
        for (genvar k = 0; k < K; k++) begin : g_k
          dsp_dual_mult #(.DW(A_W), .WW(QW_W)) u_mul (
            .d1 (dmask[2*p][k][i]),
            .d2 (dmask[2*p+1][k][i]),
            .w  (wu[i][o][k]),
            .r1 (prod[2*p][o][i][k]),
            .r2 (prod[2*p+1][o][i][k])
          );
        end
      end
    end
  end
  if (B % 2 == 1) begin : g_odd
    always_comb
      for (int o = 0; o < C2; o++)
        for (int i = 0; i < C1; i++)
          for (int k = 0; k < K; k++)
            prod[B-1][o][i][k] = RW'($signed({1'b0, dmask[B-1][k][i]}) * $signed(wu[i][o][k]));
  end

  always_comb begin
    for (int n = 0; n < B; n++) begin
      for (int o = 0; o < C2; o++) begin
        logic signed [31:0] acc;
        acc = 32'($signed(bu[o]));
        for (int i = 0; i < C1; i++)
          for (int k = 0; k < K; k++)
            acc += 32'(prod[n][o][i][k]);
        z_next[n][o] = z_t'(sat_s(64'(acc), Z_W));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < B; n++) win[n] <= '0;
      cnt     <= CW'(SEQ_POS-1);
      nseen   <= '0;
      m_valid <= 1'b0;
      m_z     <= '0;
      w1_l    <= '0;
      b1_l    <= '0;
    end else begin
      if (accept) begin
        for (int n = 0; n < B; n++)
          win[n] <= {s_a[n], win[n][K-1:1]};
        cnt <= nidx;
        if (nseen != 4'hF) nseen <= nseen + 1'b1;
      end
      if (fire) begin
        m_valid <= 1'b1;
        m_z     <= z_next;
        if (ci == '0) begin
          w1_l <= w1;
          b1_l <= b1;
        end
      end else if (m_ready) begin
        m_valid <= 1'b0;
      end
    end
  end

  initial begin
    assert (SEQ_POS >= K && SEQ_POS % 2 == 0)
      else $error("conv1_bp: SEQ_POS must be even and at least K");
  end
endmodule
