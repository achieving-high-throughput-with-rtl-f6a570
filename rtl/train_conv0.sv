// train_conv0 -- forward pass of the first Conv1D layer inside one training
// instance, at training precision.
//
// Same arithmetic as the inference layer (1->4 channels, kernel 9, padding 4,
// stride 8, ReLU: one position per beat), but with 24-bit weights and
// activations. Besides the activation a, each output record carries what the
// backward pass needs later about this position: the ReLU derivative (pre-
// activation > 0), the 9 input taps x[8p+k-4] (zero in the left padding) and
// the 4 training targets of the beat. These records travel through the
// second layer's window, which therefore plays the role of the delay buffers
// that keep forward-pass data alive until the backward pass uses them.
//
// Fixed point (design choice): x 6 fraction bits, weights/biases 20, the
// accumulator (26 fraction bits) is shifted right by 10 to 16 fraction bits
// and saturated to 24 bits.
//
// Interface: valid/ready in (8 samples, 4 targets) and out (pos_rec_t); one
// register stage, latency 1 cycle, one beat per cycle.
//
// Follows the architecture: training-module forward pass at about 24-bit
// precision, keeping forward data for the backward pass. Own choices: the
// record format and fixed point.
module train_conv0
  import eq_pkg::*;
#(
  parameter int SEQ_POS = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    s_valid,
  output logic                    s_ready,
  input  sample_t [SPB-1:0]       s_x,
  input  sample_t [SYB-1:0]       s_t,
  input  tw_t     [C1-1:0][K-1:0] w0,
  input  tw_t     [C1-1:0]        b0,
  output logic                    m_valid,
  input  logic                    m_ready,
  output pos_rec_t                m_pos
);
  localparam int CW = $clog2(SEQ_POS);

  sample_t [PAD-1:0] prev;
  logic    [CW-1:0]  pos;
  logic              accept;
  pos_rec_t          rec;

  assign s_ready = !m_valid || m_ready;
  assign accept  = s_valid && s_ready;

  always_comb begin
    for (int k = 0; k < K; k++) begin
      if (k < PAD) rec.x[k] = (pos == '0) ? sample_t'(0) : prev[k];
      else         rec.x[k] = s_x[k-PAD];
    end
    for (int c = 0; c < C1; c++) begin
      logic signed [47:0] acc;
      acc = 48'($signed(b0[c])) <<< X_F;
      for (int k = 0; k < K; k++)
        acc += 48'($signed(rec.x[k])) * 48'($signed(w0[c][k]));
      rec.act[c] = (acc > 0);
      rec.a[c]   = tw_t'(sat_s(64'(acc >>> (X_F + TW_F - TA_F)), T_W));
      if (acc <= 0) rec.a[c] = '0;
    end
    rec.t = s_t;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_pos   <= '0;
      prev    <= '0;
      pos     <= '0;
    end else begin
      if (accept) begin
        m_valid <= 1'b1;
        m_pos   <= rec;
        for (int j = 0; j < PAD; j++) prev[j] <= s_x[SPB-PAD+j];
        pos <= (pos == CW'(SEQ_POS-1)) ? '0 : pos + 1'b1;
      end else if (m_ready) begin
        m_valid <= 1'b0;
      end
    end
  end
endmodule
