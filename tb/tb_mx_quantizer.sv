// tb_mx_quantizer: random fp16 groups spanning several binades; each MX8
// element must be within one unit in the last place (truncation) of the
// fp16 value, the shared exponent must follow the largest input exponent,
// and a pair with both values below the maximum binade must use
// microexponent 1.
module tb_mx_quantizer;
  import pimba_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [15:0][15:0] x;
  mx8_group_t y;

  mx_quantizer dut (.x(x), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      automatic int emax = 0;
      for (int e = 0; e < 16; e++) begin
        x[e] = {1'($urandom), 5'(8 + $urandom_range(8)), 10'($urandom)};
        if (it % 7 == 0 && e == 3) x[e] = 16'h0000;
        if (x[e][14:10] != 0 && int'(x[e][14:10]) > emax) emax = int'(x[e][14:10]);
      end
      #1;
      checks++;
      if (int'(y.exp) != emax - 15 + 127) failures++;
      for (int e = 0; e < 16; e++) begin
        automatic real want = fp16_val(x[e]);
        automatic real got  = mx8_val(y, e);
        automatic real tol  = p2(int'(y.exp) - 127 - int'(y.micro[e/2]) - 5);
        checks++;
        if (abs_r(got - want) >= tol) begin
          failures++;
          if (failures < 10) $display("it %0d e %0d got %g want %g", it, e, got, want);
        end
      end
      for (int p = 0; p < 8; p++) begin
        automatic logic lo0 = (x[2*p][14:10] == 0) || (int'(x[2*p][14:10]) < emax);
        automatic logic lo1 = (x[2*p+1][14:10] == 0) || (int'(x[2*p+1][14:10]) < emax);
        checks++;
        if (y.micro[p] != (lo0 && lo1)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
