// eq_pkg -- shared constants, fixed-point formats and record types of the
// trainable CNN equalizer.
//
// Network (fixed by the architecture): two Conv1D layers with kernel 9 and
// padding 4. Layer 0: 1 -> 4 channels, stride 8, ReLU. Layer 1: 4 -> 8
// channels, stride 2. A stream beat of one lane carries 8 received samples
// (4 symbols at oversampling 2); layer 0 turns each beat into one 4-channel
// position, layer 1 turns every second position into 8 equalized symbols.
//
// Inference path: 6-bit signed weights and 10-bit unsigned activations, the
// widths that let two layer-1 products share one 27x18 DSP multiplier.
// Training path: 24-bit words. The fraction-bit split of every format is a
// choice of this design; only the total widths above come from the
// architecture.
//
// Contents: widths and fraction bits of every format, the weight, gradient
// and position-record types, the parameter address map, and saturation
// helpers. No timing. A module compiled on its own uses only some of these
// constants; a linter lists the rest as unused, which is expected.
package eq_pkg;

  // ---------------------------------------------------------------- topology
  localparam int SPB = 8;   // samples per beat (layer-0 stride)
  localparam int SYB = 4;   // symbols per beat (oversampling 2)
  localparam int K   = 9;   // kernel size of both layers
  localparam int PAD = 4;   // zero padding of both layers
  localparam int C1  = 4;   // layer-0 output channels
  localparam int C2  = 8;   // layer-1 output channels = symbols per output

  // --------------------------------------------------------- inference formats
  localparam int X_W  = 10, X_F  = 6;   // received sample, signed
  localparam int QW_W = 6,  QW_F = 4;   // inference weight, signed
  localparam int A_W  = 10, A_F  = 6;   // layer-0 activation, unsigned (after ReLU)
  localparam int QB_W = 16;             // inference bias, fraction X_F+QW_F = A_F+QW_F
  localparam int Z_W  = 16, Z_F  = 10;  // equalizer output, signed

  // ---------------------------------------------------------- training formats
  localparam int T_W  = 24;             // training word
  localparam int TW_F = 20;             // weights and biases
  localparam int TA_F = 16;             // activations, outputs, errors
  localparam int G_W  = 48, G_F = 24;   // gradient accumulators

  typedef logic signed [X_W-1:0]  sample_t;
  typedef logic signed [QW_W-1:0] qw_t;
  typedef logic        [A_W-1:0]  act_t;
  typedef logic signed [QB_W-1:0] qb_t;
  typedef logic signed [Z_W-1:0]  z_t;
  typedef logic signed [T_W-1:0]  tw_t;
  typedef logic signed [G_W-1:0]  g_t;

  // Quantized weight set used by the inference module.
  typedef struct packed {
    qw_t [C1-1:0][K-1:0]         w0;  // w0[c][k]
    qb_t [C1-1:0]                b0;
    qw_t [C1-1:0][C2-1:0][K-1:0] w1;  // w1[i][o][k]
    qb_t [C2-1:0]                b1;
  } qweights_t;

  // Training-precision weight set (master copy and training instances).
  typedef struct packed {
    tw_t [C1-1:0][K-1:0]         w0;
    tw_t [C1-1:0]                b0;
    tw_t [C1-1:0][C2-1:0][K-1:0] w1;
    tw_t [C2-1:0]                b1;
  } tweights_t;

  // Gradient set of one training instance over one sequence.
  typedef struct packed {
    g_t [C1-1:0][K-1:0]         w0;
    g_t [C1-1:0]                b0;
    g_t [C1-1:0][C2-1:0][K-1:0] w1;
    g_t [C2-1:0]                b1;
  } grads_t;

  // One layer-0 position inside a training instance: what the forward pass
  // of layer 1 and both backward passes need about it.
  typedef struct packed {
    tw_t     [C1-1:0]  a;    // ReLU output, TA_F fraction bits
    logic    [C1-1:0]  act;  // ReLU derivative: pre-activation > 0
    sample_t [K-1:0]   x;    // the 9 input taps x[8p+k-4] (padding as zero)
    sample_t [SYB-1:0] t;    // training targets of the 4 symbols of this beat
  } pos_rec_t;

  // Number of trainable parameters and the configuration address map:
  // w0[c][k] at c*9+k, b0[c] at 36+c, w1[i][o][k] at 40+(i*8+o)*9+k,
  // b1[o] at 328+o.
  localparam int N_PARAM  = C1*K + C1 + C1*C2*K + C2;   // 336
  localparam int A_B0     = C1*K;
  localparam int A_W1     = C1*K + C1;
  localparam int A_B1     = C1*K + C1 + C1*C2*K;

  // Saturate a signed value to a signed field of w bits.
  function automatic logic signed [63:0] sat_s(input logic signed [63:0] v, input int w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w-1)) - 64'sd1;
    lo = -(64'sd1 <<< (w-1));
    if (v > hi)      return hi;
    else if (v < lo) return lo;
    else             return v;
  endfunction

  // ReLU followed by saturation to an unsigned field of w bits.
  function automatic logic [63:0] relu_sat_u(input logic signed [63:0] v, input int w);
    logic signed [63:0] hi;
    hi = (64'sd1 <<< w) - 64'sd1;
    if (v < 0)       return 64'd0;
    else if (v > hi) return hi;
    else             return v;
  endfunction

endpackage
