// loss_mse -- output error of the training loss.
//
// For a squared-error loss the derivative with respect to each of the 8
// outputs is the difference between output and target; the constant factor
// 2/N is left to the learning rate. The loss type is this design's choice:
// the equalizer produces one real value per symbol, so a squared error
// against the known transmitted symbol is used.
//
// z: 24-bit outputs with 16 fraction bits. t: targets in the 10-bit sample
// format (6 fraction bits), aligned by a left shift of 10. e: 24-bit error,
// 16 fraction bits, saturated. Purely combinational.
//
// Follows the architecture: loss computed per output from the known
// transmitted symbols. Own choices: the loss type and the formats above.
module loss_mse
  import eq_pkg::*;
(
  input  tw_t     [C2-1:0] z,
  input  sample_t [C2-1:0] t,
  output tw_t     [C2-1:0] e
);
  always_comb
    for (int o = 0; o < C2; o++)
      e[o] = tw_t'(sat_s(64'($signed(z[o])) - (64'($signed(t[o])) <<< (TA_F - X_F)), T_W));
endmodule
