// mx_adder: element-wise sum of two wide MX groups (the "MX Adder" of the
// SPE).
//
// Following the paper's MX adder: a compare unit (CMP-delta) finds the larger
// shared exponent, which becomes the result exponent, and the difference of
// the two. For each pair the shift of each operand is its microexponent plus,
// if its group had the smaller exponent, the exponent difference; a mux per
// operand picks between the two. Each element magnitude is then shifted right
// and the signed values are added. The result always has microexponent 0.
// Own choices: GUARD extra low bits are kept below the operand LSB so that
// the stochastic rounder after the adder sees the bits shifted out, and
// shifts beyond the operand width give zero. Purely combinational.
module mx_adder
  import pimba_pkg::*;
(
  input  mxw_group_t a,
  input  mxw_group_t b,
  output mxs_group_t y
);

  localparam int EXT_W = WMAG_W + GUARD;

  logic                     a_smaller;
  logic [XEXP_W-1:0]        diff;

  always_comb begin
    // CMP-delta: max and difference of the shared exponents
    a_smaller = (a.exp < b.exp);
    y.exp     = a_smaller ? b.exp : a.exp;
    diff      = a_smaller ? XEXP_W'(b.exp - a.exp) : XEXP_W'(a.exp - b.exp);
    for (int e = 0; e < GROUP_N; e++) begin
      logic [XEXP_W:0]   sha, shb;
      logic [EXT_W-1:0]  ea, eb;
      logic signed [SUM_W-1:0] va, vb;
      // per-pair shift: microexponent, plus the difference for the smaller group
      sha = (XEXP_W+1)'(a.micro[e/2]) + (a_smaller  ? (XEXP_W+1)'(diff) : '0);
      shb = (XEXP_W+1)'(b.micro[e/2]) + (!a_smaller ? (XEXP_W+1)'(diff) : '0);
      ea  = {a.mag[e], {GUARD{1'b0}}};
      eb  = {b.mag[e], {GUARD{1'b0}}};
      ea  = (sha >= (XEXP_W+1)'(EXT_W)) ? '0 : (ea >> sha);
      eb  = (shb >= (XEXP_W+1)'(EXT_W)) ? '0 : (eb >> shb);
      va  = a.sign[e] ? -$signed(SUM_W'(ea)) : $signed(SUM_W'(ea));
      vb  = b.sign[e] ? -$signed(SUM_W'(eb)) : $signed(SUM_W'(eb));
      y.val[e] = va + vb;
    end
  end

endmodule
