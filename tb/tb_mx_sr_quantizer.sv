// tb_mx_sr_quantizer: (1) random sums must round to MX8 within one unit in
// the last place, with the largest element normalised into the top mantissa
// bit and microexponents 0; (2) a fixed value that lies between two MX8
// steps, rounded with 4000 LFSR-like random words, must average to the
// exact value (stochastic rounding), not to the truncated one.
module tb_mx_sr_quantizer;
  import pimba_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  mxs_group_t  x;
  logic [31:0] rnd;
  mx8_group_t  y;

  mx_sr_quantizer dut (.x(x), .rnd(rnd), .y(y));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      int maxm;
      x.exp = 12'(120 + int'($urandom_range(15)));
      for (int e = 0; e < 16; e++) x.val[e] = 18'($signed(18'($urandom)) >>> $urandom_range(12));
      rnd = $urandom;
      #1;
      maxm = 0;
      for (int e = 0; e < 16; e++) begin
        automatic real want = mxs_val(x, e);
        automatic real got  = mx8_val(y, e);
        checks++;
        if (abs_r(got - want) >= ulp8(y)) begin
          failures++;
          if (failures < 10) $display("it %0d e %0d got %g want %g", it, e, got, want);
        end
        if (int'(y.elem[e][5:0]) > maxm) maxm = int'(y.elem[e][5:0]);
      end
      checks++;
      if (y.micro != 0 || maxm < 31) failures++;
    end
    // stochastic rounding: 100.3 units of a 2^-2 step
    begin
      automatic real sum = 0.0, want, ex;
      x = '0;
      x.exp = 12'(127);
      x.val[0] = 18'(1605);              // 1605 * 2^-14 ; largest element
      x.val[1] = 18'(1605 * 3 / 7);      // a value needing rounding
      ex = mxs_val(x, 1);
      for (int it = 0; it < 4000; it++) begin
        rnd = $urandom;
        #1;
        sum += mx8_val(y, 1);
      end
      want = ex;
      checks++;
      if (abs_r(sum / 4000.0 - want) > 0.05 * ulp8(y)) begin
        failures++;
        $display("SR mean %g want %g ulp %g", sum / 4000.0, want, ulp8(y));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
