// train_conv1 -- forward pass of the second Conv1D layer inside one training
// instance, at training precision, plus the window of forward-pass data the
// backward pass consumes.
//
// Same structure as the inference layer (4->8 channels, kernel 9, padding 4,
// stride 2): a 9-position window of pos_rec_t records shifts by one record per
// accepted input; when the centre is an even position of its sequence an
// output of 8 values is produced. Records whose position lies outside the
// centre's sequence are zeroed (padding), which also zeroes their ReLU
// derivative so that no error flows into them.
//
// With each output the module hands over, in the same register, everything
// the loss and the backward pass of this output need: the window snapshot,
// the 8 targets (symbols of the centre beat and the beat after it), the
// layer-1 weights that were used, and first/last flags of the sequence.
//
// Weights are adopted at the first output of a sequence (centre position 0)
// and held until the next sequence. Fixed point: a (16 fraction bits) times
// w (20) accumulates with 36 fraction bits and is shifted right by 20 and
// saturated to 24 bits.
//
// Interface: valid/ready in and out; output registered in the cycle the
// completing record is accepted.
//
// Follows the architecture: second-layer forward pass of the training module.
// Own choices: carrying the forward data in the window records, weight
// adoption at sequence start, fixed point.
module train_conv1
  import eq_pkg::*;
#(
  parameter int SEQ_POS = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          s_valid,
  output logic                          s_ready,
  input  pos_rec_t                      s_pos,
  input  tw_t  [C1-1:0][C2-1:0][K-1:0]  w1,
  input  tw_t  [C2-1:0]                 b1,
  output logic                          m_valid,
  input  logic                          m_ready,
  output tw_t  [C2-1:0]                 m_z,
  output sample_t [C2-1:0]              m_t,
  output pos_rec_t [K-1:0]              m_win,
  output tw_t  [C1-1:0][C2-1:0][K-1:0]  m_w1,
  output logic                          m_first,
  output logic                          m_last
);
  localparam int CW = $clog2(SEQ_POS);

  pos_rec_t [K-1:0]             win;
  pos_rec_t [K-1:0]             wn;
  tw_t  [C1-1:0][C2-1:0][K-1:0] w1_l, wu;
  tw_t  [C2-1:0]                b1_l, bu;
  logic [CW-1:0]                cnt, nidx, ci;
  logic [3:0]                   nseen;
  logic                         accept, fire;
  tw_t  [C2-1:0]                z_next;

  assign s_ready = !m_valid || m_ready;
  assign accept  = s_valid && s_ready;

  always_comb begin
    nidx = (cnt == CW'(SEQ_POS-1)) ? '0 : cnt + 1'b1;
    ci   = (nidx >= CW'(PAD)) ? nidx - CW'(PAD) : CW'(int'(nidx) + SEQ_POS - PAD);
    fire = accept && (nseen >= 4'(PAD)) && !ci[0];
    for (int t = 0; t < K; t++) begin
      int p;
      p = int'(ci) + t - PAD;
      wn[t] = (t == K-1) ? s_pos : win[t+1];
      if (!((p >= 0) && (p < SEQ_POS))) wn[t] = '0;
    end
    wu = (ci == '0) ? w1 : w1_l;
    bu = (ci == '0) ? b1 : b1_l;
    for (int o = 0; o < C2; o++) begin
      logic signed [63:0] acc;
      acc = 64'($signed(bu[o])) <<< TA_F;
      for (int i = 0; i < C1; i++)
        for (int k = 0; k < K; k++)
          acc += 64'($signed(wn[k].a[i])) * 64'($signed(wu[i][o][k]));
      z_next[o] = tw_t'(sat_s(acc >>> TW_F, T_W));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win     <= '0;
      cnt     <= CW'(SEQ_POS-1);
      nseen   <= '0;
      m_valid <= 1'b0;
      m_z     <= '0;
      m_t     <= '0;
      m_win   <= '0;
      m_w1    <= '0;
      m_first <= 1'b0;
      m_last  <= 1'b0;
      w1_l    <= '0;
      b1_l    <= '0;
    end else begin
      if (accept) begin
        win <= {s_pos, win[K-1:1]};
        cnt <= nidx;
        if (nseen != 4'hF) nseen <= nseen + 1'b1;
      end
      if (fire) begin
        m_valid <= 1'b1;
        m_z     <= z_next;
        for (int o = 0; o < SYB; o++) begin
          m_t[o]       <= wn[PAD].t[o];
          m_t[o + SYB] <= wn[PAD+1].t[o];
        end
        m_win   <= wn;
        m_w1    <= wu;
        m_first <= (ci == '0);
        m_last  <= (ci == CW'(SEQ_POS-2));
        if (ci == '0) begin
          w1_l <= w1;
          b1_l <= b1;
        end
      end else if (m_ready) begin
        m_valid <= 1'b0;
      end
    end
  end
endmodule
