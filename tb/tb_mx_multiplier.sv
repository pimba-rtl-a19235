// tb_mx_multiplier: random MX8 group pairs; every product element must equal
// the real product of the decoded inputs to within one unit of the product's
// last place (the only loss is the one-bit shift when both microexponents
// are 1). Shared exponent and microexponents are also checked.
module tb_mx_multiplier;
  import pimba_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  mx8_group_t a, b;
  mxw_group_t y;

  mx_multiplier dut (.a(a), .b(b), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      a = rand_group(110, 140);
      b = rand_group(110, 140);
      if (it == 0) begin a.micro = '1; b.micro = '1; end
      #1;
      checks++;
      if (int'(y.exp) != int'(a.exp) + int'(b.exp) - 127) begin
        failures++; $display("exp mismatch %0d", y.exp);
      end
      for (int p = 0; p < 8; p++) begin
        checks++;
        if (y.micro[p] != (a.micro[p] || b.micro[p])) failures++;
      end
      for (int e = 0; e < 16; e++) begin
        automatic real want = mx8_val(a, e) * mx8_val(b, e);
        automatic real got  = mxw_val(y, e);
        automatic real tol  = p2(int'(y.exp) - 127 - int'(y.micro[e/2]) - 10);
        checks++;
        if (abs_r(got - want) > tol) begin
          failures++;
          if (failures < 10) $display("it %0d e %0d got %g want %g", it, e, got, want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
