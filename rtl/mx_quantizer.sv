// mx_quantizer: the Quantization Unit of the host memory controller, turning
// 16 fp16 operands into one MX8 group for REG_WRITE.
//
// As the paper outlines, it finds the largest exponent of the incoming values
// (it becomes the shared exponent, rebiased to 127) and shifts each mantissa
// right by its distance from it. Own choices: a pair whose two values are
// both below the largest exponent (or zero) gets microexponent 1, which keeps
// one more mantissa bit; shifts truncate; zero and subnormal inputs become 0;
// infinities and NaNs are treated as the largest finite exponent. Purely
// combinational.
module mx_quantizer
  import pimba_pkg::*;
(
  input  logic [GROUP_N-1:0][15:0] x,
  output mx8_group_t               y
);

  logic [GROUP_N-1:0][4:0]  ex;
  logic [GROUP_N-1:0]       nz;
  logic [4:0]               emax;
  logic [GROUP_N-1:0][10:0] sig, m;
  int                       sh [GROUP_N];

  always_comb begin
    emax = '0;
    for (int e = 0; e < GROUP_N; e++) begin
      ex[e] = (x[e][14:10] == 5'd31) ? 5'd30 : x[e][14:10];
      nz[e] = (x[e][14:10] != 5'd0);
      if (nz[e] && ex[e] > emax) emax = ex[e];
    end
    y = '0;
    y.exp = (|nz) ? (EXP_W'(emax) + EXP_W'(EXP_BIAS - 15)) : '0;
    for (int p = 0; p < MICRO_N; p++)
      y.micro[p] = (|nz) && (!nz[2*p]   || ex[2*p]   < emax) &&
                            (!nz[2*p+1] || ex[2*p+1] < emax);
    for (int e = 0; e < GROUP_N; e++) begin
      sig[e]    = {1'b1, x[e][9:0]};
      sh[e]     = 5 + int'(emax) - int'(ex[e]) - int'(y.micro[e/2]);
      m[e]      = (nz[e] && sh[e] < 11) ? (sig[e] >> sh[e]) : '0;
      y.elem[e] = {x[e][15] & (m[e] != 0), m[e][MANT_W-1:0]};
    end
  end

endmodule
