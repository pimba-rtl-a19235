// tb_mx_adder: random wide groups (products of random MX8 groups, with
// exponent gaps from 0 to 20) are added; each result element must match the
// real sum within two units of the result's last place (bits shifted below
// the guard bits are dropped), the result exponent must be the larger input
// exponent.
module tb_mx_adder;
  import pimba_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  mxw_group_t a, b;
  mxs_group_t y;
  mxw_group_t t;

  mx_adder dut (.a(a), .b(b), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      a = mx8_to_w(rand_group(120, 130));
      b = mx8_to_w(rand_group(120, 130));
      // mix in full-width product magnitudes
      if (it % 2 == 1) for (int e = 0; e < 16; e++) a.mag[e] = 12'($urandom);
      a.exp = 12'(110 + int'($urandom_range(20)));
      b.exp = 12'(110 + int'($urandom_range(20)));
      if (it % 3 == 0) b.exp = a.exp;
      #1;
      checks++;
      if (y.exp != ((a.exp > b.exp) ? a.exp : b.exp)) failures++;
      for (int e = 0; e < 16; e++) begin
        automatic real want = mxw_val(a, e) + mxw_val(b, e);
        automatic real got  = mxs_val(y, e);
        automatic real tol  = 2.0 * p2(int'(y.exp) - 127 - 14);
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
