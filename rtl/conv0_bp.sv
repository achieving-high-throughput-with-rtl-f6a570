// conv0_bp -- first Conv1D layer of the inference module, batch-parallel.
//
// B lanes are processed in lock step with one shared weight set (batch-level
// parallelism: every weight is reused for all B lanes). Per lane the layer
// has 1 input channel, 4 output channels, kernel 9, padding 4 and stride 8,
// followed by ReLU. Output position p of a sequence is
//   h[c][p] = b0[c] + sum_k w0[c][k] * x[8p + k - 4],  a = ReLU(h),
// so with 8 samples per beat each accepted beat yields exactly one position:
// taps k=0..3 come from the last four samples of the previous beat (zero at
// the first beat of a sequence, which is the left padding), taps k=4..8 from
// samples 0..4 of the current beat. The right padding is never reached with
// stride 8. Channels, kernel taps and lanes are all unrolled.
//
// Fixed point (this design's choice): x has X_F=6 fraction bits, w0 QW_F=4,
// b0 10; the accumulator is shifted right by 4 to the activation's A_F=6
// fraction bits and saturated to 0..1023 after ReLU.
//
// Interface: valid/ready stream in (one beat per lane: s_x[n][j] is sample
// 8*beat+j) and out (m_a[n][c]). One register stage; latency 1 cycle,
// throughput one beat per cycle. SEQ_POS is the number of beats (= positions)
// per sequence; the beat counter restarts the left padding every SEQ_POS
// beats.
//
// Follows the architecture: batch-level parallelism inside the layer with one
// shared weight per B multiplications; layer shape from the network.
// Own choices: stream interface, padding via the beat counter, fixed point.
module conv0_bp
  import eq_pkg::*;
#(
  parameter int B       = 32,
  parameter int SEQ_POS = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          s_valid,
  output logic                          s_ready,
  input  sample_t [B-1:0][SPB-1:0]      s_x,
  input  qw_t     [C1-1:0][K-1:0]       w0,
  input  qb_t     [C1-1:0]              b0,
  output logic                          m_valid,
  input  logic                          m_ready,
  output act_t    [B-1:0][C1-1:0]       m_a
);
  localparam int CW = $clog2(SEQ_POS);

  sample_t [B-1:0][PAD-1:0] prev;   // last 4 samples of the previous beat
  logic    [CW-1:0]         pos;    // index of the next beat in its sequence
  logic                     accept;
  act_t    [B-1:0][C1-1:0]  a_next;

  assign s_ready = !m_valid || m_ready;
  assign accept  = s_valid && s_ready;

  always_comb begin
    for (int n = 0; n < B; n++) begin
      for (int c = 0; c < C1; c++) begin
        logic signed [31:0] acc;
        sample_t            xt;
        acc = 32'($signed(b0[c]));
        for (int k = 0; k < K; k++) begin
          if (k < PAD) xt = (pos == '0) ? sample_t'(0) : prev[n][k];
          else         xt = s_x[n][k-PAD];
          acc += 32'(xt) * 32'($signed(w0[c][k]));
        end
        a_next[n][c] = act_t'(relu_sat_u(64'(acc >>> (X_F + QW_F - A_F)), A_W));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_a     <= '0;
      prev    <= '0;
      pos     <= '0;
    end else begin
      if (accept) begin
        m_valid <= 1'b1;
        m_a     <= a_next;
        for (int n = 0; n < B; n++)
          for (int j = 0; j < PAD; j++) prev[n][j] <= s_x[n][SPB-PAD+j];
        pos <= (pos == CW'(SEQ_POS-1)) ? '0 : pos + 1'b1;
      end else if (m_ready) begin
        m_valid <= 1'b0;
      end
    end
  end
endmodule
