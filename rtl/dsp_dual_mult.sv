// dsp_dual_mult -- two signed x unsigned multiplications with a common
// signed factor on one 27x18 multiplier.
//
// The two unsigned operands d1 and d2 (DW bits each) are packed into one
// 27-bit multiplicand D = {1'b0, d2, WW zero guard bits, d1}; the signed
// weight w is sign-extended to 18 bits. One multiply P = D * w then holds
// d1*w in its low DW+WW bits and d2*w in the next DW+WW bits. Because the
// lower product is signed, a negative d1*w borrows one from the upper field;
// the upper result is therefore corrected by +1 whenever the sign bit of the
// lower field is set. That is the packing and correction of the architecture;
// the correction is keyed to the sign of the lower product (which is what
// creates the borrow) rather than to the sign of w alone, so that d1 = 0 with
// a negative w is also exact.
//
// Packing needs 2*WW + DW <= 26, which the defaults (DW=10, WW=6) meet.
// Purely combinational; a synthesis tool maps the 27x18 product to one DSP.
//
// Interface: d1, d2 unsigned DW bits; w signed WW bits; r1 = d1*w and
// r2 = d2*w, signed DW+WW bits. Follows the architecture: operand packing, guard
// bits and +1 correction of the upper product. Own choice: keying the
// correction on the lower product's sign bit.
module dsp_dual_mult #(
  parameter int DW = 10,  // width of the unsigned operands
  parameter int WW = 6    // width of the signed common operand
) (
  input  logic [DW-1:0]             d1,
  input  logic [DW-1:0]             d2,
  input  logic signed [WW-1:0]      w,
  output logic signed [DW+WW-1:0]   r1,
  output logic signed [DW+WW-1:0]   r2
);
  localparam int RW = DW + WW;

  logic        [26:0] d_packed;
  logic signed [17:0] w_ext;
  logic signed [45:0] p;
  logic        [RW-1:0] r2_raw;

  always_comb begin
    d_packed = 27'({1'b0, d2, {WW{1'b0}}, d1});
    w_ext    = 18'(w);
    p        = $signed({1'b0, d_packed}) * w_ext;
    r1       = p[RW-1:0];
    r2_raw   = p[2*RW-1:RW];
    r2       = p[RW-1] ? $signed(r2_raw + RW'(1)) : $signed(r2_raw);
  end

  initial begin
    assert (2*WW + DW <= 26) else $error("dsp_dual_mult: 2*WW+DW must not exceed 26");
  end
endmodule
