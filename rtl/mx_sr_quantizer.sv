// mx_sr_quantizer: rounds an MX adder result back to an MX8 group with
// stochastic rounding.
//
// The largest element magnitude (found as the leading one of the OR of all
// magnitudes) sets the new shared exponent so that it fits the 6-bit
// mantissa. Every element is then shifted right by the same amount r; before
// the shift a random number of r bits is added, which is the paper's
// stochastic rounding: "an LFSR ... and a simple addition unit to add these
// numbers to the mantissa". The output microexponents are 0, as the paper
// states for the adder result. Own choices: a rounded mantissa of 64 is
// saturated to 63; a group whose exponent would fall below 0 is flushed to
// zero and one above 255 saturates; element e takes its random bits from the
// random word rotated by e. Purely combinational.
module mx_sr_quantizer
  import pimba_pkg::*;
(
  input  mxs_group_t  x,
  input  logic [31:0] rnd,
  output mx8_group_t  y
);

  localparam int ABS_W = SUM_W - 1;

  logic [GROUP_N-1:0][ABS_W-1:0] absv;
  logic [GROUP_N-1:0]            neg;
  logic [ABS_W-1:0]              all_or;
  int                            lead;
  logic signed [XEXP_W+1:0]      new_exp;
  int                            r;
  logic [GROUP_N-1:0][31:0]      rr;     // random word rotated per element
  logic [GROUP_N-1:0][ABS_W:0]   radd, mq;

  always_comb begin
    all_or = '0;
    for (int e = 0; e < GROUP_N; e++) begin
      logic [SUM_W-1:0] v;
      v       = x.val[e];
      neg[e]  = v[SUM_W-1];
      v       = neg[e] ? (~v + 1'b1) : v;
      absv[e] = v[ABS_W-1:0];
      all_or  = all_or | absv[e];
    end
    lead = -1;
    for (int i = 0; i < ABS_W; i++) if (all_or[i]) lead = i;

    r       = lead - (MANT_W - 1);
    new_exp = (XEXP_W+2)'(x.exp) - (XEXP_W+2)'(SFRAC) + (XEXP_W+2)'(lead);

    for (int e = 0; e < GROUP_N; e++) begin
      rr[e]   = 32'({rnd, rnd} >> e);
      radd[e] = (r > 0) ? ((ABS_W+1)'(rr[e]) & (((ABS_W+1)'(1) << r) - 1'b1)) : '0;
      mq[e]   = (r > 0) ? (((ABS_W+1)'(absv[e]) + radd[e]) >> r)
                        : ((ABS_W+1)'(absv[e]) << (-r));
      if (new_exp > 255 || mq[e] > (ABS_W+1)'((1 << MANT_W) - 1)) mq[e] = (1 << MANT_W) - 1;
    end

    y = '0;
    if (lead >= 0 && new_exp >= 0) begin
      y.exp   = (new_exp > 255) ? 8'hFF : new_exp[EXP_W-1:0];
      y.micro = '0;
      for (int e = 0; e < GROUP_N; e++)
        y.elem[e] = {neg[e] & (mq[e] != 0), mq[e][MANT_W-1:0]};
    end
  end

endmodule
