// cnn_inference -- inference module of the equalizer: P_I lanes through the
// two batch-parallel Conv1D layers.
//
// conv0_bp (1->4 channels, stride 8, ReLU) and conv1_bp (4->8 channels,
// stride 2, two products per DSP) are separate pipeline stages joined by a
// valid/ready stream, so both layers work on different positions in the same
// cycle. All PI lanes share one quantized weight set.
//
// Interface: one beat of 8 samples per lane in (s_x[n][j]); every second beat
// completes an output of 8 symbols per lane (m_z[n][o], symbol 8m+o of the
// sequence). Throughput: 4 symbols per lane per cycle. Latency: an output is
// registered one cycle after the beat holding its centre position + 4 leaves
// layer 0, i.e. the beat carrying samples 16m+32..16m+39 completes output m.
//
// Follows the architecture: a separate inference module whose parallelism
// P_I comes from batch-level parallelism inside the layers. Own choices: the
// stream interface and the one-register-per-layer pipeline.
module cnn_inference
  import eq_pkg::*;
#(
  parameter int PI      = 32,
  parameter int SEQ_POS = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         s_valid,
  output logic                         s_ready,
  input  sample_t [PI-1:0][SPB-1:0]    s_x,
  input  qweights_t                    qw,
  output logic                         m_valid,
  input  logic                         m_ready,
  output z_t      [PI-1:0][C2-1:0]     m_z
);
  logic                     a_valid, a_ready;
  act_t [PI-1:0][C1-1:0]    a;

  conv0_bp #(.B(PI), .SEQ_POS(SEQ_POS)) u_conv0 (
    .clk, .rst_n,
    .s_valid, .s_ready, .s_x,
    .w0(qw.w0), .b0(qw.b0),
    .m_valid(a_valid), .m_ready(a_ready), .m_a(a)
  );

  conv1_bp #(.B(PI), .SEQ_POS(SEQ_POS)) u_conv1 (
    .clk, .rst_n,
    .s_valid(a_valid), .s_ready(a_ready), .s_a(a),
    .w1(qw.w1), .b1(qw.b1),
    .m_valid, .m_ready, .m_z
  );
endmodule
