// eq_top -- trainable CNN equalizer: PT training instances and one PI-lane
// batch-parallel inference module sharing one weight memory.
//
// The received sample stream is cut into PT+PI parallel lanes; each lane
// carries consecutive sequences of SEQ_POS beats (8 samples = 4 symbols per
// beat, SEQ_POS*4 symbols per sequence). Lanes 0..PT-1 go to one cnn_training
// instance each, lanes PT..PT+PI-1 to cnn_inference, which computes all of
// them with one weight set. Every lane produces 8 equalized symbols every
// second beat, so the equalizer delivers 4*(PT+PI) symbols per cycle
// (PT=2, PI=32 at 150 MHz: 20.4 GBd).
//
// The training instances additionally take the known transmitted symbols of
// their lanes (s_t, 4 per beat) and deliver one gradient set per sequence to
// weight_memory, which applies the summed update (when train_en is high) and
// republishes the weights at every sequence boundary (`publish`: the last
// beat of a sequence is accepted). Inference and training lanes therefore
// always run on the same weights, the inference module on a 6-bit quantized
// copy of them.
//
// Handshake: all lanes move in lock step. s_ready is the AND of the readies of
// all modules and a beat is accepted on s_valid && s_ready; m_valid is the AND
// of their output valids and an output is taken on m_valid && m_ready.
// Outputs are 16-bit signed with 10 fraction bits; m_z[n][o] is symbol 8m+o
// of output m of lane n. Initial weights are written through cfg_* (address
// map in eq_pkg) before streaming starts.
//
// Timing: an output is registered 2 cycles after the beat carrying its last
// needed samples is accepted; one beat per lane per cycle when s_valid and
// m_ready stay high. Follows the architecture: separate inference and training
// parallelism (P_I, P_T) on shared weights, 34 lanes for 20 GBd at 150 MHz,
// sequence length 256 (64 beats). Own choices: lock-step handshake, sequence
// boundary publishing, the configuration port and the update counter.
module eq_top
  import eq_pkg::*;
#(
  parameter int PI       = 32,
  parameter int PT       = 2,
  parameter int SEQ_POS  = 64,
  parameter int LR_SHIFT = 10
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          train_en,
  input  logic                          cfg_we,
  input  logic [8:0]                    cfg_addr,
  input  tw_t                           cfg_data,
  input  logic                          s_valid,
  output logic                          s_ready,
  input  sample_t [PT+PI-1:0][SPB-1:0]  s_x,
  input  sample_t [PT-1:0][SYB-1:0]     s_t,
  output logic                          m_valid,
  input  logic                          m_ready,
  output z_t      [PT+PI-1:0][C2-1:0]   m_z,
  output logic [31:0]                   upd_count
);
  localparam int CW = $clog2(SEQ_POS);

  tweights_t               w_pub;
  qweights_t               q_pub;
  logic    [PT-1:0]        t_s_ready, t_m_valid, g_valid;
  grads_t  [PT-1:0]        g;
  logic                    i_s_ready, i_m_valid;
  logic                    accept, take, publish;
  logic    [CW-1:0]        beat;
  sample_t [PI-1:0][SPB-1:0] xi;
  z_t      [PI-1:0][C2-1:0]  zi;

  assign s_ready = (&t_s_ready) && i_s_ready;
  assign accept  = s_valid && s_ready;
  assign m_valid = (&t_m_valid) && i_m_valid;
  assign take    = m_valid && m_ready;
  assign publish = accept && (beat == CW'(SEQ_POS-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      beat <= '0;
    else if (accept) beat <= (beat == CW'(SEQ_POS-1)) ? '0 : beat + 1'b1;
  end

  for (genvar j = 0; j < PT; j++) begin : g_train
    cnn_training #(.SEQ_POS(SEQ_POS)) u_train (
      .clk, .rst_n,
      .s_valid(accept), .s_ready(t_s_ready[j]),
      .s_x(s_x[j]), .s_t(s_t[j]),
      .w(w_pub),
      .m_valid(t_m_valid[j]), .m_ready(take), .m_z(m_z[j]),
      .g_valid(g_valid[j]), .g(g[j])
    );
  end

  always_comb
    for (int n = 0; n < PI; n++) begin
      xi[n]        = s_x[PT+n];
      m_z[PT+n]    = zi[n];
    end

  cnn_inference #(.PI(PI), .SEQ_POS(SEQ_POS)) u_infer (
    .clk, .rst_n,
    .s_valid(accept), .s_ready(i_s_ready), .s_x(xi),
    .qw(q_pub),
    .m_valid(i_m_valid), .m_ready(take), .m_z(zi)
  );

  weight_memory #(.PT(PT), .LR_SHIFT(LR_SHIFT)) u_wmem (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_data,
    .train_en, .g_valid, .g, .publish,
    .w_pub, .q_pub, .upd_count
  );
endmodule
