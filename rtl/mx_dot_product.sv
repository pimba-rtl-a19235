// mx_dot_product: the SPE's Dot Product Unit. Multiplies a 256-bit MX8
// sub-chunk (two groups, 32 elements) element-wise with the matching q
// sub-chunk and sums the products into one scalar partial sum.
//
// The paper names the unit and its place (pipeline stage 4, after the state
// update, and alone in the attention score dataflow) but not its insides.
// Here each element product is an integer 6x6 multiply, shifted left by
// 2 - (sum of the two microexponents) so all products of a group share one
// scale; the products of a group are summed as integers under exponent
// Ea + Eb - 254, and the two group sums are aligned to the larger exponent
// (an all-zero group is ignored) and added. Result: acc_scalar_t,
// value = mant * 2^(exp - 12). Purely combinational.
module mx_dot_product
  import pimba_pkg::*;
(
  input  mx8_word_t   a,
  input  mx8_word_t   b,
  output acc_scalar_t y
);

  localparam int PS_W = ACC_MANT_W;

  logic signed [GROUPS_PER_WORD-1:0][PS_W-1:0]      psum;
  logic signed [GROUPS_PER_WORD-1:0][ACC_EXP_W-1:0] pexp;

  always_comb begin
    for (int g = 0; g < GROUPS_PER_WORD; g++) begin
      logic signed [PS_W-1:0] s;
      s = '0;
      for (int e = 0; e < GROUP_N; e++) begin
        logic [PS_W-1:0] p;
        int              ush;
        p   = PS_W'(a[g].elem[e][MANT_W-1:0]) * PS_W'(b[g].elem[e][MANT_W-1:0]);
        ush = 2 - int'(a[g].micro[e/2]) - int'(b[g].micro[e/2]);
        p   = p << ush;
        s   = (a[g].elem[e][ELEM_W-1] ^ b[g].elem[e][ELEM_W-1]) ? s - $signed(p) : s + $signed(p);
      end
      psum[g] = s;
      pexp[g] = ACC_EXP_W'(a[g].exp) + ACC_EXP_W'(b[g].exp) - ACC_EXP_W'(2 * EXP_BIAS);
    end
    begin
      acc_scalar_t s0, s1;
      s0.exp = pexp[0]; s0.mant = psum[0];
      s1.exp = pexp[1]; s1.mant = psum[1];
      y = acc_add(s0, s1);
    end
  end

endmodule
