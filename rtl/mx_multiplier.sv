// mx_multiplier: element-wise product of two MX8 groups (the "MX Multiplier"
// of the SPE).
//
// Three levels work side by side, as the paper describes for Pimba's MX
// multiplier:
//   * group level: the shared exponents are added (bias removed once);
//   * pair level (x8): the result microexponent is the OR of the operand
//     microexponents; their AND marks a pair whose microexponents sum to 2,
//     which one bit cannot hold, so that pair's products are shifted right
//     by one and the microexponent stays 1;
//   * element level (x16): sign XOR and an unsigned 6x6-bit multiply.
// The 12-bit product magnitude is kept in full (mxw_group_t) because it goes
// straight into the MX adder in the next pipeline stage; rounding back to
// MX8 happens only after the addition. That choice, the bias and the
// element layout are this design's own. Purely combinational.
module mx_multiplier
  import pimba_pkg::*;
(
  input  mx8_group_t a,
  input  mx8_group_t b,
  output mxw_group_t y
);

  logic [MICRO_N-1:0] both_micro;

  always_comb begin
    y.exp      = XEXP_W'(a.exp) + XEXP_W'(b.exp) - XEXP_W'(EXP_BIAS);
    y.micro    = a.micro | b.micro;
    both_micro = a.micro & b.micro;
    for (int e = 0; e < GROUP_N; e++) begin
      logic [WMAG_W-1:0] prod;
      prod      = WMAG_W'(a.elem[e][MANT_W-1:0]) * WMAG_W'(b.elem[e][MANT_W-1:0]);
      y.mag[e]  = prod >> both_micro[e/2];
      y.sign[e] = a.elem[e][ELEM_W-1] ^ b.elem[e][ELEM_W-1];
    end
  end

endmodule
